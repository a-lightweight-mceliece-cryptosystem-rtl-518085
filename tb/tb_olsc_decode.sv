// tb_olsc_decode: encodes random data with the reference generating matrix,
// adds 0..t symbol errors (random places; all in data; all in checks; all in
// one grid row so that they share checks) and checks that the decoder returns
// the original data and flags exactly the data symbols that were in error.
module tb_olsc_decode;
  import tb_ref_pkg::*;
  cw_t    cw;
  alpha_t alpha;
  msg_t   data, d;
  logic [K-1:0] corrected, exp_corr;
  int checks = 0, failures = 0;

  olsc_decode dut (.cw, .alpha, .data, .corrected);

  initial begin
    #10000000;
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
    cw_t e, code;
    int  pos, mode, nfix;
    nfix = 0;
    for (int run = 0; run < 400; run++) begin
      if (run % 50 == 0) alpha = rand_alpha();
      d    = rand_msg();
      code = vmul_kn(d, ref_g(alpha));
      mode = run % 4;
      e    = '0;
      case (mode)
        0: e = rand_err(run % (T + 1));
        1: for (int i = 0; i < T; i++) begin          // all in data
             do pos = $urandom_range(K - 1, 0); while (e[pos] != '0);
             e[pos] = B'($urandom_range(255, 1));
           end
        2: for (int i = 0; i < T; i++) begin          // all in checks
             do pos = $urandom_range(N - 1, K); while (e[pos] != '0);
             e[pos] = B'($urandom_range(255, 1));
           end
        default: begin                                // one grid row
             pos = $urandom_range(Q - 1, 0) * Q;
             for (int i = 0; i < T; i++) e[pos + 2 * i] = B'($urandom_range(255, 1));
           end
      endcase
      cw    = code ^ e;
      alpha = alpha;
      #1;
      for (int i = 0; i < KV; i++) exp_corr[i] = (e[i] != '0);
      check(data == d, $sformatf("run %0d mode %0d weight %0d: data wrong", run, mode, sym_weight(e)));
      check(corrected == exp_corr, $sformatf("run %0d: corrected flags wrong", run));
      nfix += $countones(corrected);
    end
    check(nfix > 0, "no correction ever made");
    $display("data symbols corrected: %0d", nfix);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
