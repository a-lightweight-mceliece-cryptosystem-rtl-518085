// tb_perm_vec_mul: multiplies random symbol vectors by random permutation
// matrices and checks the result against an explicit n x n matrix product.
module tb_perm_vec_mul;
  import tb_ref_pkg::*;
  cw_t   vec, out, expv;
  perm_t idx;
  int checks = 0, failures = 0;

  perm_vec_mul #(.N(N), .B(B)) dut (.vec, .idx, .out);

  initial begin
    #1000000;
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
    for (int run = 0; run < 100; run++) begin
      for (int i = 0; i < NV; i++) vec[i] = B'($urandom);
      idx = rand_perm();
      #1;
      // explicit product: M[i][j] = (idx[i] == j)
      for (int j = 0; j < NV; j++) begin
        expv[j] = '0;
        for (int i = 0; i < NV; i++) if (int'(idx[i]) == j) expv[j] ^= vec[i];
      end
      check(out == expv, $sformatf("run %0d wrong", run));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
