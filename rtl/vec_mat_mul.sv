// vec_mat_mul: multiplies a row vector of b-bit symbols by a binary matrix.
//
// out[j] = XOR over i of (mat[i][j] ? vec[i] : 0), i.e. y = x M over GF(2)
// applied to every bit plane of the symbols at once. This is how a binary
// matrix acts on non-binary OLSC symbols: the key stays a binary k x n matrix
// while each message symbol carries b bits. Purely combinational: the
// surrounding unit registers the result. Used for m G' in the encryption unit
// and for m' S^-1 in the decryption unit (the figure's "Vector Matrix Mul").
module vec_mat_mul #(
  parameter int unsigned R = 64,    // vector length / matrix rows
  parameter int unsigned C = 128,   // matrix columns / result length
  parameter int unsigned B = 8      // bits per symbol
) (
  input  logic [R-1:0][B-1:0] vec,
  input  logic [R-1:0][C-1:0] mat,
  output logic [C-1:0][B-1:0] out
);
  for (genvar j = 0; j < C; j++) begin : g_col
    always_comb begin
      out[j] = '0;
      for (int unsigned i = 0; i < R; i++)
        if (mat[i][j]) out[j] ^= vec[i];
    end
  end
endmodule
