// tb_gf2_mat_inv: inverts random non-singular matrices (including ones that
// need row swaps) and checks S * S^-1 = I with a reference product, checks
// that singular matrices are flagged, and the k-cycle latency.
module tb_gf2_mat_inv;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, busy, done, valid, singular;
  smat_t s_mat, inv, a, ident;
  int checks = 0, failures = 0;

  gf2_mat_inv #(.K(K)) dut (.clk, .rst_n, .load, .s_mat, .busy, .done, .valid,
    .singular, .inv);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
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

  task automatic run_one(smat_t m, output int lat);
    @(negedge clk);
    s_mat = m;
    load = 1;
    @(negedge clk);
    load = 0;
    lat = 0;
    while (!done) begin @(negedge clk); lat++; end
  endtask

  initial begin
    int lat, swaps;
    for (int i = 0; i < KV; i++) ident[i] = K'(1) << i;
    swaps = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 12; run++) begin
      a = rand_nonsing();
      if (!a[0][0]) swaps++;
      run_one(a, lat);
      check(lat == K + 1, $sformatf("latency %0d, expected %0d", lat, K + 1));
      check(valid && !singular, $sformatf("run %0d: flagged singular", run));
      check(mul_kk(a, inv) == ident, $sformatf("run %0d: S * inv != I", run));
      check(mul_kk(inv, a) == ident, $sformatf("run %0d: inv * S != I", run));
    end
    // a matrix that needs a swap in column 0
    a = rand_nonsing();
    a[0] = '0;
    a[0][K-1] = 1'b1;
    if (rank_k(a) == K) begin
      run_one(a, lat);
      check(valid && mul_kk(a, inv) == ident, "swap case wrong");
      swaps++;
    end
    check(swaps > 0, "no pivot swap exercised");
    // singular matrices: a repeated row, and a zero column
    for (int run = 0; run < 4; run++) begin
      a = rand_nonsing();
      if (run[0]) a[K-1] = a[3];
      else for (int r = 0; r < KV; r++) a[r][5] = 1'b0;
      run_one(a, lat);
      check(singular && !valid, $sformatf("singular %0d not flagged", run));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
