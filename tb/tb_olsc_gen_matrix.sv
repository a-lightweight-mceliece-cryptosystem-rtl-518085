// tb_olsc_gen_matrix: checks the OLSC generating matrix against the reference
// construction in tb_ref_pkg for several random multiplier sets, checks the
// orthogonality of the parity part (two data rows share at most one check
// column, every row has weight 2t+1) and the latency of k cycles.
module tb_olsc_gen_matrix;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  alpha_t alpha;
  gmat_t  g_mat, g_ref;
  int checks = 0, failures = 0;

  olsc_gen_matrix dut (.clk, .rst_n, .start, .alpha, .busy, .done, .g_mat);

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
    int lat, w, shared;
    alpha = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 6; run++) begin
      @(negedge clk);
      alpha = rand_alpha();
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 0;
      while (!done) begin @(negedge clk); lat++; end
      check(lat == K, $sformatf("latency %0d, expected %0d", lat, K));
      g_ref = ref_g(alpha);
      for (int i = 0; i < KV; i++)
        check(g_mat[i] == g_ref[i], $sformatf("run %0d row %0d", run, i));
      for (int i = 0; i < KV; i++) begin
        w = $countones(g_mat[i]);
        check(w == 2 * T + 1, $sformatf("row %0d weight %0d", i, w));
        for (int j = i + 1; j < KV; j += 7) begin
          shared = $countones(g_mat[i][N-1:K] & g_mat[j][N-1:K]);
          check(shared <= 1, $sformatf("rows %0d,%0d share %0d checks", i, j, shared));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
