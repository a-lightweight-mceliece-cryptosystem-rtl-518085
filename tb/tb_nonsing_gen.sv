// tb_nonsing_gen: checks that every drawn S has full rank k over GF(2)
// (reference elimination in tb_ref_pkg), that draws differ and are dense
// enough to be random, and the k-cycle latency.
module tb_nonsing_gen;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  smat_t s_mat, prev;
  int checks = 0, failures = 0;

  nonsing_gen #(.K(K)) dut (.clk, .rst_n, .start, .busy, .done, .s_mat);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int lat, ones;
    prev = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 8; run++) begin
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 0;
      while (!done) begin @(negedge clk); lat++; end
      check(lat == K, $sformatf("latency %0d, expected %0d", lat, K));
      check(rank_k(s_mat) == K, $sformatf("run %0d: S is singular", run));
      check(s_mat != prev, $sformatf("run %0d: same as previous draw", run));
      ones = $countones(s_mat);
      check(ones > K * K / 4 && ones < K * K * 3 / 4, $sformatf("run %0d: %0d ones", run, ones));
      prev = s_mat;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
