// tb_mce_encrypt: loads a random public key row by row, encrypts random
// messages and checks that c XOR m G' (reference product) has exactly t
// nonzero symbols, that `ready` drops while a message is in flight, that the
// latency is t + 1 cycles plus the reported collisions, and that a new key
// takes effect.
module tb_mce_encrypt;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, pk_valid = 0, msg_valid = 0, ready, c_valid;
  logic [5:0]   pk_idx;
  logic [N-1:0] pk_row;
  msg_t  msg;
  cw_t   c;
  logic [15:0] collisions;
  gmat_t key;
  int checks = 0, failures = 0;

  mce_encrypt dut (.clk, .rst_n, .pk_valid, .pk_idx, .pk_row, .msg_valid, .msg,
    .ready, .c_valid, .c, .collisions);

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

  task automatic load_key();
    for (int r = 0; r < KV; r++)
      for (int j = 0; j < NV; j++) key[r][j] = 1'($urandom);
    for (int r = K - 1; r >= 0; r--) begin   // any row order is accepted
      @(negedge clk);
      pk_valid = 1;
      pk_idx   = 6'(r);
      pk_row   = key[r];
    end
    @(negedge clk);
    pk_valid = 0;
  endtask

  initial begin
    int lat, coll_total;
    msg_t m;
    coll_total = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int kr = 0; kr < 2; kr++) begin
      load_key();
      for (int run = 0; run < 40; run++) begin
        @(negedge clk);
        check(ready, "not ready when idle");
        m = rand_msg();
        msg = m;
        msg_valid = 1;
        @(negedge clk);
        msg_valid = 0;
        msg = '0;
        check(!ready, "ready while busy");
        lat = 0;
        while (!c_valid) begin @(negedge clk); lat++; end
        check(lat == T + 1 + int'(collisions), $sformatf("latency %0d, collisions %0d", lat, collisions));
        check(sym_weight(c ^ vmul_kn(m, key)) == T, $sformatf("key %0d run %0d: error weight %0d",
              kr, run, sym_weight(c ^ vmul_kn(m, key))));
        coll_total += int'(collisions);
      end
    end
    $display("collisions: %0d", coll_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
