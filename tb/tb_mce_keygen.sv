// tb_mce_keygen: runs key generation with random code parameters and checks
// that the streamed public key equals S G P computed by the reference model
// from the unit's own S and P and the reference G, that S is non-singular and
// P a permutation, that two runs give different keys, and that the latency is
// max(k, n) + k + 2 cycles.
module tb_mce_keygen;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done, priv_valid, pk_valid;
  logic [5:0]   pk_idx;
  logic [N-1:0] pk_row;
  alpha_t alpha, a_run;
  smat_t  s_mat, s_cap;
  perm_t  perm, p_cap;
  gmat_t  pk, ref_pk, prev_pk;
  int checks = 0, failures = 0;

  mce_keygen dut (.clk, .rst_n, .start, .alpha, .busy, .done, .priv_valid,
    .s_mat, .perm, .pk_valid, .pk_idx, .pk_row);

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
    int lat, nrows, privs;
    prev_pk = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      @(negedge clk);
      alpha = rand_alpha();
      a_run = alpha;
      start = 1;
      @(negedge clk);
      start = 0;
      alpha = '0;           // the unit must have latched the parameters
      lat = 0;
      nrows = 0;
      privs = 0;
      pk = '0;
      forever begin
        if (priv_valid) begin
          s_cap = s_mat;
          p_cap = perm;
          privs++;
        end
        if (pk_valid) begin
          pk[pk_idx] = pk_row;
          nrows++;
        end
        if (done) break;
        @(negedge clk);
        lat++;
      end
      check(lat == N + K + 2, $sformatf("latency %0d, expected %0d", lat, N + K + 2));
      check(privs == 1 && nrows == K, $sformatf("priv %0d rows %0d", privs, nrows));
      check(rank_k(s_cap) == K, "S singular");
      check(is_perm(p_cap), "P not a permutation");
      check(s_mat == s_cap && perm == p_cap, "S or P changed during the multiply");
      check(pk != prev_pk, "same key as previous run");
      ref_pk = ref_sgp(s_cap, ref_g(a_run), p_cap);
      for (int r = 0; r < KV; r++)
        check(pk[r] == ref_pk[r], $sformatf("run %0d: G' row %0d wrong", run, r));
      prev_pk = pk;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
