// rand_error: draws the error vector e of Eq. 2, t nonzero b-bit symbols at
// t distinct random positions out of n.
//
// Each cycle draws a position pos = floor(rnd16 * n / 2**16) and a symbol
// value. If that position is still clean and the value is nonzero, it is
// written and the count goes up; otherwise the draw is thrown away and retried
// (a "collision"). `done` pulses when t symbols are placed, so the latency is
// t cycles plus one per collision; `collisions` counts the discarded draws of
// the last run. `e_vec` is cleared on `start` and held after `done`.
// The paper says only that e has weight t; the symbol-weight reading, the
// sampling method and the random source are this design's choices.
module rand_error #(
  parameter int unsigned N    = 128,
  parameter int unsigned T    = 4,
  parameter int unsigned B    = 8,
  parameter logic [31:0] SEED = 32'h5EED_0003,
  localparam int unsigned NW = $clog2(N)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                busy,
  output logic                done,
  output logic [N-1:0][B-1:0] e_vec,
  output logic [15:0]         collisions
);
  localparam int unsigned RW = 16 + ((B + 15) / 16) * 16;

  logic [RW-1:0]        rnd;
  logic [NW-1:0]        pos;
  logic [B-1:0]         val;
  logic [$clog2(T+1)-1:0] cnt;
  logic                 hit;

  prng #(.W(RW), .SEED(SEED)) u_rng (.clk, .rst_n, .en(1'b1), .rnd);

  always_comb begin
    logic [16+NW:0] prod;
    prod = (16 + NW + 1)'(rnd[15:0]) * (16 + NW + 1)'(N);
    pos  = NW'(prod >> 16);
    val  = rnd[16 +: B];
    hit  = (e_vec[pos] == '0) && (val != '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      done       <= 1'b0;
      cnt        <= '0;
      e_vec      <= '0;
      collisions <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy       <= 1'b1;
        cnt        <= '0;
        e_vec      <= '0;
        collisions <= '0;
      end else if (busy) begin
        if (hit) begin
          e_vec[pos] <= val;
          cnt        <= cnt + 1'b1;
          if (cnt == ($clog2(T+1))'(T - 1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end else begin
          collisions <= collisions + 1'b1;
        end
      end
    end
  end
endmodule
