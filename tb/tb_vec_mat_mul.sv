// tb_vec_mat_mul: random symbol vectors and binary matrices at the encryption
// size (64 x 128) and the S^-1 size (64 x 64), checked against reference
// products, plus a unit-vector test that must return one matrix row.
module tb_vec_mat_mul;
  import tb_ref_pkg::*;
  msg_t  v1, v2;
  gmat_t m1;
  smat_t m2;
  cw_t   o1;
  msg_t  o2;
  int checks = 0, failures = 0;

  vec_mat_mul #(.R(K), .C(N), .B(B)) dut1 (.vec(v1), .mat(m1), .out(o1));
  vec_mat_mul #(.R(K), .C(K), .B(B)) dut2 (.vec(v2), .mat(m2), .out(o2));

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
    int r;
    for (int run = 0; run < 50; run++) begin
      v1 = rand_msg();
      v2 = rand_msg();
      for (int i = 0; i < KV; i++) begin
        for (int j = 0; j < NV; j++) m1[i][j] = 1'($urandom);
        for (int j = 0; j < KV; j++) m2[i][j] = 1'($urandom);
      end
      #1;
      check(o1 == vmul_kn(v1, m1), $sformatf("run %0d: x G wrong", run));
      check(o2 == vmul_kk(v2, m2), $sformatf("run %0d: x S wrong", run));
      // a unit vector selects one row
      r  = $urandom_range(K - 1, 0);
      v1 = '0;
      v1[r] = 8'hA5;
      #1;
      for (int j = 0; j < NV; j++)
        check(o1[j] == (m1[r][j] ? 8'hA5 : 8'h00), $sformatf("unit row %0d col %0d", r, j));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
