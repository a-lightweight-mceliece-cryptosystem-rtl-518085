// olsc_gen_matrix: builds the k x n OLSC generating matrix G = [I | M^T].
//
// Row i of G belongs to data symbol i = r*q + c. It has a one in column i
// (the identity part) and one in each of the 2t check groups: group 0 at check
// r, group 1 at check c, group g >= 2 at check alpha[g-2]*r + c over GF(q)
// (see olsc_pkg). So every row has weight 2t+1 and two rows share at most one
// check column, which is what makes the Latin squares orthogonal.
//
// Interface: pulse `start` with the Latin-square multipliers on `alpha`
// (2t-2 distinct nonzero GF(q) elements: the "parameters of the linear code").
// The block latches them, writes one row per cycle and raises `done` for one
// cycle after k cycles; `g_mat` then holds G until the next start.
// The structure of G follows the paper ([I | M^T], 2t-2 Latin squares of size
// q x q, identity of order 2tq); generating the squares as a*r + c over GF(q)
// and sequencing it row by row are this design's choices.
module olsc_gen_matrix
  import olsc_pkg::*;
#(
  parameter int unsigned QW   = QW_DEF,
  parameter int unsigned T    = T_DEF,
  parameter int unsigned POLY = POLY_DEF,
  localparam int unsigned Q  = 1 << QW,
  localparam int unsigned K  = Q * Q,
  localparam int unsigned N  = K + 2 * T * Q,
  localparam int unsigned NA = 2 * T - 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [NA-1:0][QW-1:0]     alpha,
  output logic                      busy,
  output logic                      done,
  output logic [K-1:0][N-1:0]       g_mat
);
  logic [NA-1:0][QW-1:0] alpha_q;
  logic [$clog2(K)-1:0]  row;
  logic [N-1:0]          row_bits;

  // One row of G for data symbol `row`.
  always_comb begin
    logic [QW_MAX-1:0] r, c, v, a;
    r = QW_MAX'(row >> QW);
    c = QW_MAX'(row & (Q - 1));
    row_bits = '0;
    row_bits[int'(row)] = 1'b1;
    for (int unsigned g = 0; g < 2 * T; g++) begin
      a = (g >= 2) ? QW_MAX'(alpha_q[g-2]) : '0;
      v = olsc_check(r, c, g, a, QW, POLY);
      row_bits[K + g * Q + int'(v[QW-1:0])] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      row     <= '0;
      alpha_q <= '0;
      g_mat   <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy    <= 1'b1;
        row     <= '0;
        alpha_q <= alpha;
      end else if (busy) begin
        g_mat[row] <= row_bits;
        row        <= row + 1'b1;
        if (row == $clog2(K)'(K - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // The multipliers must be distinct and nonzero for the squares to be orthogonal.
  always_ff @(posedge clk) begin
    if (start && !busy) begin
      for (int unsigned i = 0; i < NA; i++) begin
        assert (alpha[i] != '0) else $error("alpha[%0d] is zero", i);
        for (int unsigned j = i + 1; j < NA; j++)
          assert (alpha[i] != alpha[j]) else $error("alpha[%0d] == alpha[%0d]", i, j);
      end
    end
  end
endmodule
