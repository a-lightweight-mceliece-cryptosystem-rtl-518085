// olsc_decode: one-step majority-logic decoder of the non-binary OLSC.
//
// Input is the received word c' = c P^-1 (k data symbols then 2tq check
// symbols, layout in olsc_pkg). The decoder forms the 2tq syndrome symbols
// s[g][v] = check[g][v] XOR (data symbols in that check). Every data symbol
// d_i lies in exactly one check of each of the 2t groups, and no two data
// symbols share more than one check. If d_i carries error E, at least t+1 of
// its 2t syndromes equal E (the at most t-1 other errors can each spoil only
// one of them); if d_i is clean, no nonzero value appears more than t times.
// So for each of the k data symbols the decoder takes a majority vote among
// its 2t syndrome symbols: a value that occurs more than t times is the error
// and is XORed onto d_i. For b = 1 this is exactly Algorithm 1's rule "flip
// c'_i when u_i, the number of failing checks of bit i, exceeds the
// threshold". All k votes run in parallel in one combinational stage, which
// the surrounding unit closes with a single register (single-cycle decoding).
// `corrected[i]` marks data symbols that were changed. Only the data part is
// returned, since only it is needed for m = m' S^-1.
// Threshold: the paper writes u_i > q/2; this module uses > t, which is the
// same at the default q = 2t and is the majority of the 2t votes in general.
module olsc_decode
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
  localparam int unsigned G2 = 2 * T
) (
  input  logic [N-1:0][B-1:0]   cw,
  input  logic [NA-1:0][QW-1:0] alpha,
  output logic [K-1:0][B-1:0]   data,
  output logic [K-1:0]          corrected
);
  logic [G2-1:0][Q-1:0][B-1:0] syn;

  // Syndromes, gathered per check: for group g >= 2 the symbol of grid row r
  // in check v sits in column c = v XOR alpha*r.
  for (genvar g = 0; g < G2; g++) begin : g_grp
    for (genvar v = 0; v < Q; v++) begin : g_chk
      always_comb begin
        logic [QW_MAX-1:0] a, cc;
        a = (g >= 2) ? QW_MAX'(alpha[(g >= 2) ? g - 2 : 0]) : '0;
        syn[g][v] = cw[K + g * Q + v];
        for (int unsigned r = 0; r < Q; r++) begin
          if (g == 0)      cc = QW_MAX'(r);
          else if (g == 1) cc = QW_MAX'(v);
          else             cc = QW_MAX'(v) ^ gf_mul(a, QW_MAX'(r), QW, POLY);
          if (g == 0) syn[g][v] ^= cw[v * Q + int'(cc[QW-1:0])];
          else        syn[g][v] ^= cw[r * Q + int'(cc[QW-1:0])];
        end
      end
    end
  end

  // k parallel majority votes among 2t syndrome symbols each.
  for (genvar i = 0; i < K; i++) begin : g_vote
    always_comb begin
      logic [QW_MAX-1:0]      r, c, a, v;
      logic [G2-1:0][B-1:0]   vote;
      logic [B-1:0]           err;
      int unsigned            cnt;
      r = QW_MAX'(i >> QW);
      c = QW_MAX'(i & (Q - 1));
      for (int unsigned g = 0; g < G2; g++) begin
        a = (g >= 2) ? QW_MAX'(alpha[(g >= 2) ? g - 2 : 0]) : '0;
        v = olsc_check(r, c, g, a, QW, POLY);
        vote[g] = syn[g][v[QW-1:0]];
      end
      err = '0;
      for (int unsigned j = 0; j < G2; j++) begin
        cnt = 0;
        for (int unsigned h = 0; h < G2; h++)
          if (vote[h] == vote[j]) cnt++;
        if (cnt > T) err = vote[j];
      end
      data[i]      = cw[i] ^ err;
      corrected[i] = (err != '0);
    end
  end
endmodule
