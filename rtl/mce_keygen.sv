// mce_keygen: the Key Generation unit.
//
// On `start` it runs the three generators of the figure side by side: the
// OLSC generating matrix G (olsc_gen_matrix, k cycles, from the code
// parameters `alpha`), the random permutation P (perm_gen, n cycles) and the
// random non-singular S (nonsing_gen, k cycles). When all three are done it
// pulses `priv_valid` (S and P are then stable on `s_mat` / `perm` for the
// decryption unit's inverters) and starts keygen_matmul, which streams the k
// rows of the public key G' = S G P on `pk_valid / pk_idx / pk_row`, one row
// per cycle. `done` pulses with the last row. A new `start` is ignored while
// `busy`. Latency from the edge that takes start to done: max(k, n) + k + 2 cycles.
// The units and their connections follow the paper's figure; the sequencing
// and handshake are this design's choices.
module mce_keygen
  import olsc_pkg::*;
#(
  parameter int unsigned QW   = QW_DEF,
  parameter int unsigned T    = T_DEF,
  parameter int unsigned POLY = POLY_DEF,
  localparam int unsigned Q  = 1 << QW,
  localparam int unsigned K  = Q * Q,
  localparam int unsigned N  = K + 2 * T * Q,
  localparam int unsigned NA = 2 * T - 2,
  localparam int unsigned KW = $clog2(K),
  localparam int unsigned NW = $clog2(N)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [NA-1:0][QW-1:0] alpha,
  output logic                  busy,
  output logic                  done,
  output logic                  priv_valid,
  output logic [K-1:0][K-1:0]   s_mat,
  output logic [N-1:0][NW-1:0]  perm,
  output logic                  pk_valid,
  output logic [KW-1:0]         pk_idx,
  output logic [N-1:0]          pk_row
);
  typedef enum logic [1:0] {IDLE, GEN, MUL} state_e;
  state_e state;

  logic [K-1:0][N-1:0] g_mat;
  logic g_busy, g_done, p_busy, p_done, s_busy, s_done, m_busy, m_done;
  logic g_ok, p_ok, s_ok;
  logic go;

  assign go = (state == IDLE) && start;

  olsc_gen_matrix #(.QW(QW), .T(T), .POLY(POLY)) u_gen (
    .clk, .rst_n, .start(go), .alpha, .busy(g_busy), .done(g_done), .g_mat);

  perm_gen #(.N(N)) u_perm (
    .clk, .rst_n, .start(go), .busy(p_busy), .done(p_done), .perm);

  nonsing_gen #(.K(K)) u_s (
    .clk, .rst_n, .start(go), .busy(s_busy), .done(s_done), .s_mat);

  keygen_matmul #(.K(K), .N(N)) u_mul (
    .clk, .rst_n, .start(priv_valid), .s_mat, .g_mat, .perm,
    .busy(m_busy), .done(m_done),
    .row_valid(pk_valid), .row_idx(pk_idx), .row_out(pk_row));

  assign busy = (state != IDLE);
  assign done = m_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= IDLE;
      g_ok       <= 1'b0;
      p_ok       <= 1'b0;
      s_ok       <= 1'b0;
      priv_valid <= 1'b0;
    end else begin
      priv_valid <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          state <= GEN;
          g_ok  <= 1'b0;
          p_ok  <= 1'b0;
          s_ok  <= 1'b0;
        end
        GEN: begin
          if (g_done) g_ok <= 1'b1;
          if (p_done) p_ok <= 1'b1;
          if (s_done) s_ok <= 1'b1;
          if ((g_ok || g_done) && (p_ok || p_done) && (s_ok || s_done)) begin
            state      <= MUL;
            priv_valid <= 1'b1;
          end
        end
        MUL: if (m_done) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
