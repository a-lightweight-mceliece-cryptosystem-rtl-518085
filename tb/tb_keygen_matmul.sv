// tb_keygen_matmul: random S, G and P; checks every streamed row of G' = S G P
// against the reference product, the row order, the back-to-back streaming and
// the k-cycle latency.
module tb_keygen_matmul;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done, row_valid;
  logic [5:0]   row_idx;
  logic [N-1:0] row_out;
  smat_t s_mat;
  gmat_t g_mat, ref_gp;
  perm_t perm;
  int checks = 0, failures = 0;

  keygen_matmul #(.K(K), .N(N)) dut (.clk, .rst_n, .start, .s_mat, .g_mat, .perm,
    .busy, .done, .row_valid, .row_idx, .row_out);

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
    int lat, nrows;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      s_mat = rand_nonsing();
      for (int r = 0; r < KV; r++)
        for (int c = 0; c < NV; c++) g_mat[r][c] = 1'($urandom);
      perm   = rand_perm();
      ref_gp = ref_sgp(s_mat, g_mat, perm);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 0;
      nrows = 0;
      forever begin
        if (row_valid) begin
          check(row_idx == 6'(nrows), $sformatf("row %0d came as %0d", nrows, row_idx));
          check(row_out == ref_gp[row_idx], $sformatf("run %0d row %0d wrong", run, row_idx));
          nrows++;
        end else begin
          check(nrows == 0, "gap in row stream");
        end
        if (done) break;
        @(negedge clk);
        lat++;
      end
      check(lat == K, $sformatf("latency %0d, expected %0d", lat, K));
      check(nrows == K, $sformatf("%0d rows", nrows));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
