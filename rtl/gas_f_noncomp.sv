// gas_f_noncomp -- function f of the non-complementary G-Anti-SAT lock.
//
// The n-bit input L is viewed as a 2^(n-t) x 2^t K-map: the low n-t bits
// l[n-t-1:0] label the rows and the high t bits l[n-1:n-t] label the columns.
// The true set of f is one whole column, the one labelled COL, so f is the
// AND of the t column bits, each taken true or complemented to match COL
// (COL = 0 gives f = ~l[n-1] & ... & ~l[n-t]).  |F^T| = 2^(n-t).
// Parameter range 2 <= T <= N-1 follows the published construction; the
// column label default of all zeros is the one the construction's equations
// are written for.  The row bits of l are not used by f (lint reports them
// as unused); the port keeps the full n-bit L so that f and g share one
// interface, as in the block diagram.  Combinational, no clock.
module gas_f_noncomp #(
  parameter int unsigned  N   = 25,
  parameter int unsigned  T   = 3,
  parameter logic [T-1:0] COL = '0
) (
  input  logic [N-1:0] l,
  output logic         f
);
  always_comb f = (l[N-1 -: T] == COL);

  initial begin
    assert (T >= 2 && T <= N - 1)
      else $error("gas_f_noncomp: T=%0d outside 2..N-1", T);
  end
endmodule
