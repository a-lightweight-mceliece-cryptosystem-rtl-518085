// olsc_pkg: constants and functions shared by the OLSC McEliece co-processor.
//
// The code is a non-binary Orthogonal Latin Square Code (OLSC). Data symbols
// d[r][c] sit on a q x q grid (q = 2**QW), so k = q*q. There are 2t groups of
// q check symbols, so n = k + 2tq. Group 0 checks grid rows, group 1 grid
// columns, and group g >= 2 checks the cells of one Latin square
// L_a(r,c) = a*r + c over GF(q), where a = alpha[g-2] is a nonzero field
// element. Distinct nonzero multipliers give the 2t-2 mutually orthogonal
// Latin squares the code needs; which multipliers are used is the run-time
// "parameters of the linear code". Symbols are b bits wide and all matrix
// arithmetic is over GF(2), i.e. symbol-wise XOR.
//
// Column layout of G = [I | M^T]: columns 0..k-1 are data symbols (data index
// i = r*q + c), column k + g*q + v is check v of group g.
//
// The defaults (q = 8, t = 4, b = 8) are this design's choice: the paper gives
// no sizes. q = 2t makes the paper's vote threshold q/2 equal to t.
package olsc_pkg;

  // Default code size.
  parameter int unsigned QW_DEF   = 3;      // log2(q)
  parameter int unsigned T_DEF    = 4;      // correctable symbol errors
  parameter int unsigned B_DEF    = 8;      // bits per symbol
  parameter int unsigned POLY_DEF = 'hB;    // x^3 + x + 1, GF(8)

  // Widest field supported by gf_mul.
  localparam int unsigned QW_MAX = 8;

  // Multiply a and b in GF(2**qw) reduced by poly (poly includes the x**qw term).
  function automatic logic [QW_MAX-1:0] gf_mul(input logic [QW_MAX-1:0] a,
                                               input logic [QW_MAX-1:0] b,
                                               input int unsigned qw,
                                               input int unsigned poly);
    logic [QW_MAX-1:0] acc;
    logic [QW_MAX:0]   x;
    acc = '0;
    x   = {1'b0, a};
    for (int unsigned i = 0; i < QW_MAX; i++) begin
      if (i < qw) begin
        if (b[i]) acc ^= x[QW_MAX-1:0];
        x = x << 1;
        if (x[qw]) x ^= (QW_MAX+1)'(poly);
      end
    end
    return acc;
  endfunction

  // Check index v (0..q-1) that data symbol (r, c) belongs to in group g.
  // For g >= 2, a is the Latin-square multiplier of that group.
  function automatic logic [QW_MAX-1:0] olsc_check(input logic [QW_MAX-1:0] r,
                                                   input logic [QW_MAX-1:0] c,
                                                   input int unsigned g,
                                                   input logic [QW_MAX-1:0] a,
                                                   input int unsigned qw,
                                                   input int unsigned poly);
    if (g == 0)      return r;
    else if (g == 1) return c;
    else             return gf_mul(a, r, qw, poly) ^ c;
  endfunction

endpackage
