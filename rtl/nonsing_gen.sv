// nonsing_gen: draws a random k x k non-singular binary matrix S.
//
// S is built as the product S = L U of a random unit lower-triangular L and a
// random unit upper-triangular U over GF(2). Both factors have determinant 1,
// so S is always non-singular and no retry loop is needed. The rows are made
// in order: in cycle r the block draws row r of L and row r of U, stores U[r],
// and forms S[r] = U[r] ^ XOR_{j<r} L[r][j] U[j], which needs only U rows that
// already exist. L is never stored.
//
// Interface: pulse `start`; `done` pulses after k cycles and `s_mat` (row r in
// s_mat[r], column j in bit j) holds S until the next start.
// The paper names the generator only. The LU construction is this design's
// choice; it reaches only those non-singular matrices that have an LU
// factorisation without pivoting.
module nonsing_gen #(
  parameter int unsigned K    = 64,
  parameter logic [31:0] SEED = 32'h5EED_0002,
  localparam int unsigned KW = $clog2(K)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                busy,
  output logic                done,
  output logic [K-1:0][K-1:0] s_mat
);
  logic [K-1:0][K-1:0] u_mat;
  logic [2*K-1:0]      rnd;
  logic [KW-1:0]       row;
  logic [K-1:0]        l_row, u_row, s_row;

  prng #(.W(2 * K), .SEED(SEED)) u_rng (.clk, .rst_n, .en(1'b1), .rnd);

  always_comb begin
    for (int unsigned j = 0; j < K; j++) begin
      // L[r][j]: random below the diagonal, one on it, zero above.
      l_row[j] = (j < row) ? rnd[j] : (KW'(j) == row);
      // U[r][j]: random above the diagonal, one on it, zero below.
      u_row[j] = (j > row) ? rnd[K + j] : (KW'(j) == row);
    end
    s_row = u_row;
    for (int unsigned j = 0; j < K; j++)
      if (j < row && l_row[j]) s_row ^= u_mat[j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      row   <= '0;
      u_mat <= '0;
      s_mat <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        row  <= '0;
      end else if (busy) begin
        u_mat[row] <= u_row;
        s_mat[row] <= s_row;
        row        <= row + 1'b1;
        if (row == KW'(K - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
