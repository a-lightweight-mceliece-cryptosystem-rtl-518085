// mce_decrypt: the Decryption unit, m = Decode(c P^-1) S^-1 (Eq. 3,
// Algorithm 1).
//
// Key set-up: pulse `key_load` with the private S and P from key generation.
// perm_inverse forms P^-1 in one cycle and gf2_mat_inv forms S^-1 in k+1
// cycles; both are kept here. `keys_ready` goes high once both are valid.
// Decryption: when `c_valid` is high with a cipher on `c` (and keys_ready),
// the whole chain c' = c P^-1 (perm_vec_mul), majority decoding (olsc_decode)
// and m = m' S^-1 (vec_mat_mul) is evaluated in one combinational stage and
// registered, so `m_valid` and `m` appear on the next cycle: a latency of one
// cycle and a rate of one cipher per cycle, the paper's single-cycle
// decoding. `corrected` marks the data symbols of c' that the decoder fixed.
// `alpha` are the code parameters, the same as given to key generation.
// The order of the three stages follows the paper's figure; doing all three in
// the same cycle is this design's reading of "single-cycle decoding unit".
module mce_decrypt
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
  localparam int unsigned NW = $clog2(N)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  key_load,
  input  logic [K-1:0][K-1:0]   s_mat,
  input  logic [N-1:0][NW-1:0]  perm,
  output logic                  keys_ready,
  output logic                  singular,
  input  logic [NA-1:0][QW-1:0] alpha,
  input  logic                  c_valid,
  input  logic [N-1:0][B-1:0]   c,
  output logic                  m_valid,
  output logic [K-1:0][B-1:0]   m,
  output logic [K-1:0]          corrected
);
  logic [K-1:0][K-1:0]  s_inv;
  logic [N-1:0][NW-1:0] pinv;
  logic                 p_valid, s_valid, s_busy, s_done;
  logic [N-1:0][B-1:0]  c_perm;
  logic [K-1:0][B-1:0]  m_dec, m_out;
  logic [K-1:0]         corr;

  perm_inverse #(.N(N)) u_pinv (
    .clk, .rst_n, .load(key_load), .perm, .valid(p_valid), .pinv);

  gf2_mat_inv #(.K(K)) u_sinv (
    .clk, .rst_n, .load(key_load), .s_mat, .busy(s_busy), .done(s_done),
    .valid(s_valid), .singular, .inv(s_inv));

  perm_vec_mul #(.N(N), .B(B)) u_cp (.vec(c), .idx(pinv), .out(c_perm));

  olsc_decode #(.QW(QW), .T(T), .B(B), .POLY(POLY)) u_dec (
    .cw(c_perm), .alpha, .data(m_dec), .corrected(corr));

  vec_mat_mul #(.R(K), .C(K), .B(B)) u_ms (.vec(m_dec), .mat(s_inv), .out(m_out));

  assign keys_ready = p_valid && s_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid   <= 1'b0;
      m         <= '0;
      corrected <= '0;
    end else begin
      m_valid <= c_valid && keys_ready;
      if (c_valid && keys_ready) begin
        m         <= m_out;
        corrected <= corr;
      end
    end
  end
endmodule
