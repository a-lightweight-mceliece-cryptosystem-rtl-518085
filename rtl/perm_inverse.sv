// perm_inverse: the "Inverse of P" unit; computes P^-1 = P^T.
//
// P arrives in row form (row i has its one in column perm[i]). The inverse in
// the same form has its row perm[i] one in column i, so pinv[perm[i]] = i: a
// scatter of the indices, done for all n rows in one cycle. Pulse `load` with
// P on `perm`; one cycle later `pinv` holds P^-1 and `valid` stays high until
// the next load. `perm` must be a permutation.
// The paper precomputes P^-1 (Algorithm 1); the row-index form and the
// single-cycle scatter are this design's choices.
module perm_inverse #(
  parameter int unsigned N = 128,
  localparam int unsigned NW = $clog2(N)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic [N-1:0][NW-1:0] perm,
  output logic                 valid,
  output logic [N-1:0][NW-1:0] pinv
);
  logic [N-1:0][NW-1:0] inv_d;

  always_comb begin
    inv_d = '0;
    for (int unsigned i = 0; i < N; i++)
      inv_d[perm[i]] = NW'(i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      pinv  <= '0;
    end else if (load) begin
      valid <= 1'b1;
      pinv  <= inv_d;
    end
  end
endmodule
