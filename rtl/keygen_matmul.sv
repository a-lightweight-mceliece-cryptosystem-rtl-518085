// keygen_matmul: computes the public key G' = S G P, one row per cycle.
//
// Row r of S G is the XOR of the rows G[j] for which S[r][j] = 1. Multiplying
// that row by the permutation matrix P (row form: P[i][perm[i]] = 1) moves bit
// i to column perm[i]. The result is streamed out as it is made: `row_valid`
// is high for k consecutive cycles, the first set by the edge after the one
// that takes `start`, with
// `row_idx` = r and `row_out` = row r of G'. `done` pulses with the last row.
// There is no back-pressure; the receiver must take one row per cycle.
// The paper gives the function (Eq. 1, the "Matrix Mul" block); the row-serial
// schedule is this design's choice.
module keygen_matmul #(
  parameter int unsigned K = 64,
  parameter int unsigned N = 128,
  localparam int unsigned KW = $clog2(K),
  localparam int unsigned NW = $clog2(N)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [K-1:0][K-1:0]  s_mat,
  input  logic [K-1:0][N-1:0]  g_mat,
  input  logic [N-1:0][NW-1:0] perm,
  output logic                 busy,
  output logic                 done,
  output logic                 row_valid,
  output logic [KW-1:0]        row_idx,
  output logic [N-1:0]         row_out
);
  logic [KW-1:0] row;
  logic [N-1:0]  sg_row, sgp_row;

  always_comb begin
    sg_row = '0;
    for (int unsigned j = 0; j < K; j++)
      if (s_mat[row][j]) sg_row ^= g_mat[j];
    sgp_row = '0;
    for (int unsigned i = 0; i < N; i++)
      sgp_row[perm[i]] = sg_row[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      row       <= '0;
      row_valid <= 1'b0;
      row_idx   <= '0;
      row_out   <= '0;
    end else begin
      done      <= 1'b0;
      row_valid <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        row  <= '0;
      end else if (busy) begin
        row_valid <= 1'b1;
        row_idx   <= row;
        row_out   <= sgp_row;
        row       <= row + 1'b1;
        if (row == KW'(K - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
