// gf2_mat_inv: the "Inverse of S" unit; inverts a k x k matrix over GF(2).
//
// Gauss-Jordan elimination on the augmented matrix [A | X], with A = S and
// X = I at the start, one column per cycle. In the cycle for column j the unit
// picks as pivot the first row that has a one in column j and has not been a
// pivot before, and XORs the pivot row into every other row with a one in
// column j. Rows are not swapped: each row instead records the column it was
// the pivot for. After k columns, A is a permutation matrix and the row that
// pivoted column j holds row j of S^-1; one more cycle puts the rows in
// order. If some column finds no pivot the matrix is singular: `singular` is
// raised with `done` and `inv` is then meaningless. Row and column selection
// use one-hot masks, so no row is addressed by a computed index.
//
// Interface: pulse `load` with S on `s_mat` (row r in s_mat[r]); `done`
// pulses k+1 cycles later; `inv` holds the result and `valid` stays high
// until the next load if S was non-singular.
// The paper precomputes S^-1 (Algorithm 1); the elimination is this design's
// choice.
module gf2_mat_inv #(
  parameter int unsigned K = 64,
  localparam int unsigned KW = $clog2(K)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,
  input  logic [K-1:0][K-1:0] s_mat,
  output logic                busy,
  output logic                done,
  output logic                valid,
  output logic                singular,
  output logic [K-1:0][K-1:0] inv
);
  logic [K-1:0][K-1:0]  a_q, x_q, a_d, x_d;
  logic [K-1:0][KW-1:0] pcol;       // column each row was pivot for
  logic [K-1:0]         used;       // rows that have been pivots
  logic [K-1:0]         col_oh;     // current column, one-hot
  logic [KW-1:0]        col;
  logic [K-1:0]         cand, sel;  // candidate and chosen pivot rows
  logic [K-1:0]         piv_a, piv_x;
  logic                 found, sorting;

  // Rows that may pivot column `col`, and the first of them.
  always_comb begin
    for (int unsigned r = 0; r < K; r++)
      cand[r] = !used[r] && ((a_q[r] & col_oh) != '0);
    sel   = cand & (~cand + 1'b1);  // lowest set bit
    found = (cand != '0);
  end

  // Pivot row by AND-OR selection, then elimination in all other rows.
  always_comb begin
    piv_a = '0;
    piv_x = '0;
    for (int unsigned r = 0; r < K; r++) begin
      if (sel[r]) begin
        piv_a |= a_q[r];
        piv_x |= x_q[r];
      end
    end
    for (int unsigned r = 0; r < K; r++) begin
      if (!sel[r] && (a_q[r] & col_oh) != '0) begin
        a_d[r] = a_q[r] ^ piv_a;
        x_d[r] = x_q[r] ^ piv_x;
      end else begin
        a_d[r] = a_q[r];
        x_d[r] = x_q[r];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      sorting  <= 1'b0;
      done     <= 1'b0;
      valid    <= 1'b0;
      singular <= 1'b0;
      col      <= '0;
      col_oh   <= '0;
      used     <= '0;
      pcol     <= '0;
      a_q      <= '0;
      x_q      <= '0;
      inv      <= '0;
    end else begin
      done <= 1'b0;
      if (load) begin
        busy     <= 1'b1;
        sorting  <= 1'b0;
        valid    <= 1'b0;
        singular <= 1'b0;
        col      <= '0;
        col_oh   <= K'(1);
        used     <= '0;
        a_q      <= s_mat;
        for (int unsigned r = 0; r < K; r++) x_q[r] <= K'(1) << r;
      end else if (busy && !sorting) begin
        a_q  <= a_d;
        x_q  <= x_d;
        used <= used | sel;
        for (int unsigned r = 0; r < K; r++)
          if (sel[r]) pcol[r] <= col;
        if (!found) singular <= 1'b1;
        col    <= col + 1'b1;
        col_oh <= col_oh << 1;
        if (col == KW'(K - 1)) sorting <= 1'b1;
      end else if (busy) begin
        // row r pivoted column pcol[r]: it is row pcol[r] of the inverse
        for (int unsigned r = 0; r < K; r++)
          inv[pcol[r]] <= x_q[r];
        busy    <= 1'b0;
        sorting <= 1'b0;
        done    <= 1'b1;
        valid   <= !singular;
      end
    end
  end
endmodule
