// tb_rand_error: checks that every error vector has exactly t nonzero symbols,
// that the latency is t cycles plus the reported collisions, that positions
// and values vary from draw to draw, and that collisions do occur over many
// draws (the retry path is exercised).
module tb_rand_error;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  cw_t  e_vec, prev;
  logic [15:0] collisions;
  int checks = 0, failures = 0;

  rand_error #(.N(N), .T(T), .B(B)) dut (.clk, .rst_n, .start, .busy, .done,
    .e_vec, .collisions);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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
    int lat, total_coll, hits[N];
    prev = '0;
    total_coll = 0;
    for (int i = 0; i < NV; i++) hits[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2000; run++) begin
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 0;
      while (!done) begin @(negedge clk); lat++; end
      check(sym_weight(e_vec) == T, $sformatf("run %0d: weight %0d", run, sym_weight(e_vec)));
      check(lat == T + int'(collisions), $sformatf("run %0d: latency %0d with %0d collisions",
                                                   run, lat, collisions));
      check(e_vec != prev, $sformatf("run %0d: repeated vector", run));
      total_coll += int'(collisions);
      for (int i = 0; i < NV; i++) if (e_vec[i] != '0) hits[i]++;
      prev = e_vec;
    end
    check(total_coll > 0, "no collision ever happened");
    for (int i = 0; i < NV; i++)
      check(hits[i] > 0, $sformatf("position %0d never hit", i));
    $display("collisions over all runs: %0d", total_coll);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
