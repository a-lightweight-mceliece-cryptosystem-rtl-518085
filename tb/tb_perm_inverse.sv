// tb_perm_inverse: random permutations; checks pinv[perm[i]] = i for all i,
// the one-cycle latency and that the result holds until the next load.
module tb_perm_inverse;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, valid;
  perm_t perm, pinv, p;
  int checks = 0, failures = 0;

  perm_inverse #(.N(N)) dut (.clk, .rst_n, .load, .perm, .valid, .pinv);

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
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(!valid, "valid before any load");
    for (int run = 0; run < 50; run++) begin
      p = rand_perm();
      perm = p;
      load = 1;
      @(negedge clk);
      load = 0;
      check(valid, "not valid one cycle after load");
      for (int i = 0; i < NV; i++)
        check(pinv[p[i]] == NW'(i), $sformatf("run %0d: pinv[perm[%0d]]", run, i));
      perm = rand_perm();   // input changes without load: output must hold
      @(negedge clk);
      for (int i = 0; i < NV; i++)
        check(pinv[p[i]] == NW'(i), $sformatf("run %0d: result not held at %0d", run, i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
