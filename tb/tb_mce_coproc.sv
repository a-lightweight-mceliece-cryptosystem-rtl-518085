// tb_mce_coproc: end-to-end test of the co-processor at its default size
// (q = 8, t = 4, b = 8: k = 64 symbols of plaintext, n = 128 of cipher).
//
// For two key generations with different code parameters it: captures the
// public key G' from the key output stream and loops it back into the key
// input; encrypts random messages and checks that c XOR m G' has exactly t
// nonzero symbols; feeds every cipher back into decryption and checks the
// message returns one cycle later; also decrypts ciphers built here from G'
// with 0..t errors and with errors only in the check part, back to back.
// It counts each mechanism of the design and fails if one never happened:
// key generation, key loop-back, encryption, error-position collision in the
// error generator, decryption, data-symbol correction, decryption with a
// clean data part, back-to-back decryption.
module tb_mce_coproc;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic kg_start = 0, kg_busy, kg_done;
  alpha_t alpha;
  logic msg_valid = 0, enc_ready;
  msg_t msg;
  logic dec_valid;
  msg_t dec_msg;
  logic [K-1:0] dec_corrected;
  logic keys_ready, key_singular;
  logic pk_out_valid, pk_in_valid;
  logic [5:0] pk_out_idx, pk_in_idx;
  logic [N-1:0] pk_out_row, pk_in_row;
  logic cipher_out_valid, cipher_in_valid = 0;
  cw_t  cipher_out, cipher_in;
  logic [15:0] enc_collisions;
  gmat_t pub;
  int checks = 0, failures = 0;
  int n_keygen = 0, n_loopback = 0, n_enc = 0, n_coll = 0, n_dec = 0, n_fix = 0,
      n_clean = 0, n_b2b = 0;

  mce_coproc dut (
    .clk, .rst_n, .kg_start, .alpha, .kg_busy, .kg_done,
    .msg_valid, .msg, .enc_ready, .dec_valid, .dec_msg, .dec_corrected,
    .keys_ready, .key_singular,
    .pk_out_valid, .pk_out_idx, .pk_out_row, .pk_in_valid, .pk_in_idx, .pk_in_row,
    .cipher_out_valid, .cipher_out, .enc_collisions, .cipher_in_valid, .cipher_in);

  // I/O loop-back of the public key, as between two chips.
  assign pk_in_valid = pk_out_valid;
  assign pk_in_idx   = pk_out_idx;
  assign pk_in_row   = pk_out_row;

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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

  // Decrypt one cipher and compare after one cycle.
  task automatic decrypt(cw_t c, msg_t expect_m, string what);
    cipher_in = c;
    cipher_in_valid = 1;
    @(negedge clk);
    cipher_in_valid = 0;
    check(dec_valid, {what, ": no result after one cycle"});
    check(dec_msg == expect_m, {what, ": wrong message"});
    n_dec++;
    if (dec_corrected != '0) n_fix++;
    else n_clean++;
  endtask

  initial begin
    int   lat, rows;
    msg_t m, q[$];
    cw_t  c, e;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int kr = 0; kr < 2; kr++) begin
      // ---- key generation
      @(negedge clk);
      alpha = rand_alpha();
      kg_start = 1;
      @(negedge clk);
      kg_start = 0;
      lat = 0;
      rows = 0;
      pub = '0;
      forever begin
        if (pk_out_valid) begin
          pub[pk_out_idx] = pk_out_row;
          rows++;
        end
        if (kg_done) break;
        @(negedge clk);
        lat++;
      end
      check(lat == N + K + 2, $sformatf("key generation %0d cycles, expected %0d", lat, N + K + 2));
      check(rows == K, $sformatf("%0d key rows", rows));
      n_keygen++;
      n_loopback += rows;
      while (!keys_ready) @(negedge clk);
      check(!key_singular, "S flagged singular");
      // ---- encrypt on chip, decrypt on chip
      for (int run = 0; run < 40; run++) begin
        check(enc_ready, "encryption not ready");
        m = rand_msg();
        msg = m;
        msg_valid = 1;
        @(negedge clk);
        msg_valid = 0;
        lat = 0;
        while (!cipher_out_valid) begin @(negedge clk); lat++; end
        check(lat == T + 1 + int'(enc_collisions), $sformatf("encryption %0d cycles", lat));
        n_coll += int'(enc_collisions);
        c = cipher_out;
        check(sym_weight(c ^ vmul_kn(m, pub)) == T, "cipher error weight is not t");
        n_enc++;
        decrypt(c, m, $sformatf("key %0d run %0d", kr, run));
      end
      // ---- ciphers made here: 0..t errors anywhere
      for (int run = 0; run < 20; run++) begin
        m = rand_msg();
        decrypt(vmul_kn(m, pub) ^ rand_err(run % (T + 1)), m, $sformatf("ext %0d", run));
      end
      // ---- back to back, one cipher per cycle
      for (int run = 0; run < 16; run++) begin
        m = rand_msg();
        q.push_back(m);
        cipher_in = vmul_kn(m, pub) ^ rand_err(T);
        cipher_in_valid = 1;
        @(negedge clk);
        check(dec_valid && dec_msg == q.pop_front(), $sformatf("back-to-back %0d", run));
        n_b2b++;
      end
      cipher_in_valid = 0;
      @(negedge clk);
    end
    $display("key generations %0d, key rows looped back %0d, encryptions %0d, collisions %0d",
             n_keygen, n_loopback, n_enc, n_coll);
    $display("decryptions %0d (with correction %0d, clean %0d), back-to-back %0d",
             n_dec, n_fix, n_clean, n_b2b);
    check(n_keygen == 2, "key generation");
    check(n_loopback == 2 * K, "key loop-back");
    check(n_enc > 0, "encryption");
    check(n_coll > 0, "error-position collision never happened");
    check(n_dec > 0, "decryption");
    check(n_fix > 0, "data-symbol correction never happened");
    check(n_clean > 0, "decryption with clean data part never happened");
    check(n_b2b > 0, "back-to-back decryption");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
