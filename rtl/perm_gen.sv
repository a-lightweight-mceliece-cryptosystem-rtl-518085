// perm_gen: draws a random n x n permutation matrix P.
//
// P is held in row form: row i of P has its single one in column perm[i], so
// for a row vector x, (x P)[perm[i]] = x[i]. The permutation is drawn with a
// Fisher-Yates shuffle: perm starts as the identity, then for i = n-1 down to 1
// one cycle swaps perm[i] with perm[j], j = floor(rnd16 * (i+1) / 2**16).
//
// Interface: pulse `start`; `done` pulses once n cycles later (one cycle to load
// the identity, n-1 swap cycles) and `perm` holds P until the next start.
// The paper names this generator only; the shuffle and the random source (prng)
// are this design's choices. The multiply-and-shift index has a small bias.
module perm_gen #(
  parameter int unsigned N    = 128,
  parameter logic [31:0] SEED = 32'h5EED_0001,
  localparam int unsigned NW = $clog2(N)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  output logic [N-1:0][NW-1:0] perm
);
  logic [31:0]   rnd;
  logic [NW-1:0] i;
  logic [NW-1:0] j;
  logic          init;

  prng #(.W(32), .SEED(SEED)) u_rng (.clk, .rst_n, .en(1'b1), .rnd);

  // j = floor(rnd[15:0] * (i+1) / 65536), always in 0..i.
  always_comb begin
    logic [16+NW:0] prod;
    prod = (16 + NW + 1)'(rnd[15:0]) * (16 + NW + 1)'(i + 1'b1);
    j    = NW'(prod >> 16);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      init <= 1'b0;
      i    <= '0;
      perm <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        init <= 1'b1;
      end else if (busy && init) begin
        for (int unsigned x = 0; x < N; x++) perm[x] <= NW'(x);
        init <= 1'b0;
        i    <= NW'(N - 1);
      end else if (busy) begin
        perm[i] <= perm[j];
        perm[j] <= perm[i];
        i       <= i - 1'b1;
        if (i == NW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
