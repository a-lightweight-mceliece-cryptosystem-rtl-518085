// tb_mce_decrypt: loads a random non-singular S and permutation P, waits for
// keys_ready (k + 1 cycles), then sends ciphers c = (m S G + e) P made by the
// reference model with up to t errors and checks that m comes back exactly one
// cycle later. Also sends back-to-back ciphers (one per cycle) and checks
// that no result appears without keys.
module tb_mce_decrypt;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, key_load = 0, keys_ready, singular, c_valid = 0, m_valid;
  smat_t  s_mat, s;
  perm_t  perm, p;
  alpha_t alpha;
  cw_t    c;
  msg_t   m;
  logic [K-1:0] corrected;
  gmat_t  pub;
  int checks = 0, failures = 0;

  mce_decrypt dut (.clk, .rst_n, .key_load, .s_mat, .perm, .keys_ready, .singular,
    .alpha, .c_valid, .c, .m_valid, .m, .corrected);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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
    msg_t q[$];
    msg_t mm;
    int   lat, fixes;
    fixes = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // no keys yet: no output
    c = '0;
    c_valid = 1;
    @(negedge clk);
    c_valid = 0;
    check(!m_valid, "output without keys");
    for (int kr = 0; kr < 2; kr++) begin
      alpha = rand_alpha();
      s = rand_nonsing();
      p = rand_perm();
      pub = ref_sgp(s, ref_g(alpha), p);
      s_mat = s;
      perm = p;
      key_load = 1;
      @(negedge clk);
      key_load = 0;
      s_mat = '0;
      perm = '0;
      lat = 0;
      while (!keys_ready) begin @(negedge clk); lat++; end
      check(lat == K + 1, $sformatf("key set-up %0d cycles, expected %0d", lat, K + 1));
      check(!singular, "S flagged singular");
      // one at a time
      for (int run = 0; run < 40; run++) begin
        mm = rand_msg();
        c = vmul_kn(mm, pub) ^ rand_err(run % (T + 1));
        c_valid = 1;
        @(negedge clk);
        c_valid = 0;
        check(m_valid, "no result after one cycle");
        check(m == mm, $sformatf("key %0d run %0d: wrong message", kr, run));
        fixes += $countones(corrected);
      end
      // back to back, one cipher per cycle
      for (int run = 0; run < 20; run++) begin
        mm = rand_msg();
        q.push_back(mm);
        c = vmul_kn(mm, pub) ^ rand_err(T);
        c_valid = 1;
        @(negedge clk);
        check(m_valid && m == q.pop_front(), $sformatf("streamed run %0d wrong", run));
      end
      c_valid = 0;
      @(negedge clk);
      check(!m_valid, "spurious output");
    end
    check(fixes > 0, "no data symbol corrected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
