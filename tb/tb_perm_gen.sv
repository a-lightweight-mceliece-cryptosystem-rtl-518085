// tb_perm_gen: checks that each drawn P is a permutation, that successive
// draws differ, that the shuffle moves most entries, and the n-cycle latency.
module tb_perm_gen;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  perm_t perm, prev;
  int checks = 0, failures = 0;

  perm_gen #(.N(N)) dut (.clk, .rst_n, .start, .busy, .done, .perm);

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
    int lat, fixed;
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
      check(lat == N, $sformatf("latency %0d, expected %0d", lat, N));
      check(is_perm(perm), $sformatf("run %0d: not a permutation", run));
      check(perm != prev, $sformatf("run %0d: same as previous draw", run));
      fixed = 0;
      for (int i = 0; i < NV; i++) if (perm[i] == NW'(i)) fixed++;
      check(fixed < N / 4, $sformatf("run %0d: %0d fixed points", run, fixed));
      prev = perm;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
