// mce_encrypt: the Encryption unit, c = m G' + e (Eq. 2).
//
// The public key G' arrives from the I/O side one row per cycle on
// `pk_valid / pk_idx / pk_row` and is kept in a k x n bit key store. A message
// of k b-bit symbols is accepted on `msg_valid` when `ready` is high and held
// in the plaintext register; at the same time rand_error starts drawing e.
// When e is complete, the cipher c = m G' XOR e (vec_mat_mul followed by the
// figure's "Vector Add", a symbol-wise XOR) is registered and `c_valid` pulses
// for one cycle. Latency from msg_valid to c_valid is t + 1 cycles plus one
// per error-position collision. Loading a key row while a message is in
// flight is allowed but changes the key used for it.
// The three sub-blocks and their order follow the paper's figure; the key
// store, the handshake and the timing are this design's choices.
module mce_encrypt
  import olsc_pkg::*;
#(
  parameter int unsigned QW   = QW_DEF,
  parameter int unsigned T    = T_DEF,
  parameter int unsigned B    = B_DEF,
  localparam int unsigned Q  = 1 << QW,
  localparam int unsigned K  = Q * Q,
  localparam int unsigned N  = K + 2 * T * Q,
  localparam int unsigned KW = $clog2(K)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                pk_valid,
  input  logic [KW-1:0]       pk_idx,
  input  logic [N-1:0]        pk_row,
  input  logic                msg_valid,
  input  logic [K-1:0][B-1:0] msg,
  output logic                ready,
  output logic                c_valid,
  output logic [N-1:0][B-1:0] c,
  output logic [15:0]         collisions
);
  logic [K-1:0][N-1:0] pk_mat;
  logic [K-1:0][B-1:0] plain;
  logic [N-1:0][B-1:0] mg, e_vec;
  logic                e_busy, e_done, active;

  rand_error #(.N(N), .T(T), .B(B)) u_err (
    .clk, .rst_n, .start(msg_valid && ready), .busy(e_busy), .done(e_done),
    .e_vec, .collisions);

  vec_mat_mul #(.R(K), .C(N), .B(B)) u_mul (.vec(plain), .mat(pk_mat), .out(mg));

  assign ready = !active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pk_mat  <= '0;
      plain   <= '0;
      active  <= 1'b0;
      c_valid <= 1'b0;
      c       <= '0;
    end else begin
      c_valid <= 1'b0;
      if (pk_valid) pk_mat[pk_idx] <= pk_row;
      if (msg_valid && ready) begin
        plain  <= msg;
        active <= 1'b1;
      end
      if (active && e_done) begin
        c       <= mg ^ e_vec;   // Vector Add
        c_valid <= 1'b1;
        active  <= 1'b0;
      end
    end
  end
endmodule
