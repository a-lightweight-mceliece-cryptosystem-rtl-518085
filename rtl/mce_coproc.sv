// mce_coproc: OLSC-based McEliece co-processor, key generation, encryption
// and decryption units wired as in the paper's architecture figure.
//
// Processor side: `kg_start` with the code parameters `alpha` (2t-2 distinct
// nonzero GF(q) Latin-square multipliers) starts key generation; the
// parameters are latched and used by both the generating-matrix unit and the
// decoder. `msg_valid / msg` hands a k-symbol plaintext to encryption when
// `enc_ready`; `dec_valid / dec_msg` return decrypted messages.
// I/O side: the public key G' leaves on `pk_out_*` (k rows, one per cycle) and
// the key used for encryption enters on `pk_in_*`, so a chip can encrypt for a
// peer; the cipher leaves on `cipher_out_*` and a received cipher enters on
// `cipher_in_*`. Key generation hands S and P straight to the decryption
// unit, which inverts them (`keys_ready`). The processor and the I/O block are
// outside this module; their links are its ports.
// Timing: key generation takes max(k, n) + k + 2 cycles to `kg_done`;
// encryption t + 1 cycles plus one per error collision; decryption 1 cycle.
module mce_coproc
  import olsc_pkg::*;
#(
  parameter int unsigned QW   = QW_DEF,
  parameter int unsigned T    = T_DEF,
  parameter int unsigned B    = B_DEF,
  parameter int unsigned POLY = POLY_DEF,
  localparam int unsigned Q  = 1 << QW,
  localparam int unsigned K  = Q * Q,
  localparam int unsigned N  = K + 2 * T * Q,
  localparam int unsigned NA = 2 * T - 2,
  localparam int unsigned KW = $clog2(K)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // processor: code parameters and key generation
  input  logic                  kg_start,
  input  logic [NA-1:0][QW-1:0] alpha,
  output logic                  kg_busy,
  output logic                  kg_done,
  // processor: message to encrypt
  input  logic                  msg_valid,
  input  logic [K-1:0][B-1:0]   msg,
  output logic                  enc_ready,
  // processor: decrypted message
  output logic                  dec_valid,
  output logic [K-1:0][B-1:0]   dec_msg,
  output logic [K-1:0]          dec_corrected,
  output logic                  keys_ready,
  output logic                  key_singular,
  // I/O: public key out / in
  output logic                  pk_out_valid,
  output logic [KW-1:0]         pk_out_idx,
  output logic [N-1:0]          pk_out_row,
  input  logic                  pk_in_valid,
  input  logic [KW-1:0]         pk_in_idx,
  input  logic [N-1:0]          pk_in_row,
  // I/O: cipher out / in
  output logic                  cipher_out_valid,
  output logic [N-1:0][B-1:0]   cipher_out,
  output logic [15:0]           enc_collisions,
  input  logic                  cipher_in_valid,
  input  logic [N-1:0][B-1:0]   cipher_in
);
  localparam int unsigned NW = $clog2(N);

  logic [NA-1:0][QW-1:0] cfg_alpha;
  logic                  priv_valid;
  logic [K-1:0][K-1:0]   s_mat;
  logic [N-1:0][NW-1:0]  perm;

  // Code parameters, latched when key generation starts.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    cfg_alpha <= '0;
    else if (kg_start && !kg_busy) cfg_alpha <= alpha;
  end

  mce_keygen #(.QW(QW), .T(T), .POLY(POLY)) u_keygen (
    .clk, .rst_n, .start(kg_start), .alpha, .busy(kg_busy), .done(kg_done),
    .priv_valid, .s_mat, .perm,
    .pk_valid(pk_out_valid), .pk_idx(pk_out_idx), .pk_row(pk_out_row));

  mce_encrypt #(.QW(QW), .T(T), .B(B)) u_enc (
    .clk, .rst_n, .pk_valid(pk_in_valid), .pk_idx(pk_in_idx), .pk_row(pk_in_row),
    .msg_valid, .msg, .ready(enc_ready),
    .c_valid(cipher_out_valid), .c(cipher_out), .collisions(enc_collisions));

  mce_decrypt #(.QW(QW), .T(T), .B(B), .POLY(POLY)) u_dec (
    .clk, .rst_n, .key_load(priv_valid), .s_mat, .perm,
    .keys_ready, .singular(key_singular), .alpha(cfg_alpha),
    .c_valid(cipher_in_valid), .c(cipher_in),
    .m_valid(dec_valid), .m(dec_msg), .corrected(dec_corrected));
endmodule
