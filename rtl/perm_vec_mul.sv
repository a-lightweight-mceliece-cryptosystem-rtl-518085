// perm_vec_mul: multiplies a vector of b-bit symbols by a permutation matrix,
// the figure's "Vector Matrix Mul" that forms c' = c P^-1 in decryption.
//
// The matrix is given in row form: row i has its single one in column idx[i].
// Then (x M)[idx[i]] = x[i], so the product is a scatter of the symbols, with
// no XOR needed. Purely combinational. `idx` must be a permutation.
// Keeping a permutation matrix as n indices instead of n*n bits is this
// design's choice; the product is the one in Algorithm 1.
module perm_vec_mul #(
  parameter int unsigned N = 128,
  parameter int unsigned B = 8,
  localparam int unsigned NW = $clog2(N)
) (
  input  logic [N-1:0][B-1:0]  vec,
  input  logic [N-1:0][NW-1:0] idx,
  output logic [N-1:0][B-1:0]  out
);
  always_comb begin
    out = '0;
    for (int unsigned i = 0; i < N; i++)
      out[idx[i]] = vec[i];
  end
endmodule
