// prng: pseudo-random bit source for the key and error generators.
//
// W output bits come from ceil(W/32) independent 32-bit xorshift generators
// (x ^= x<<13; x ^= x>>17; x ^= x<<5), each seeded from SEED and its lane
// number. A new word appears on `rnd` every cycle in which `en` is high.
// Reset loads the seeds. The paper names random generators but not how they
// draw their bits; this source is the design's own choice and is not meant as
// a cryptographic random number generator.
module prng #(
  parameter int unsigned W    = 32,
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  output logic [W-1:0] rnd
);
  localparam int unsigned L = (W + 31) / 32;

  logic [L-1:0][31:0] st;

  function automatic logic [31:0] xs32(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned l = 0; l < L; l++)
        st[l] <= (SEED ^ (32'h9E37_79B9 * (l + 1))) | 32'h1;
    end else if (en) begin
      for (int unsigned l = 0; l < L; l++)
        st[l] <= xs32(st[l]);
    end
  end

  assign rnd = W'(st);
endmodule
