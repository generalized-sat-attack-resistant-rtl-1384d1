// gas_g_comp -- function g of the complementary G-Anti-SAT lock (f = ~g).
//
// K-map view as for the non-complementary lock: rows = l[n-t-1:0], columns =
// l[n-1:n-t].  Column DIV is the "dividing column".  g is true on every other
// column (g1, an OR of the t column bits against DIV) plus the one cell of
// the dividing column whose row label is CELL (g2, which merges with the
// whole row).  |G^T| = 2^n - 2^(n-t) + 1 and |F^T| = 2^(n-t) - 1.
// The complementary lock's f block is this same logic applied to its own
// key-gated input and inverted; gas_lock does that inversion.
// Range 1 <= T <= N-1 follows the published construction; DIV = 0 and
// CELL = 0 are the defaults its equations are written for.
// Combinational, no clock.
module gas_g_comp #(
  parameter int unsigned    N    = 25,
  parameter int unsigned    T    = 3,
  parameter logic [T-1:0]   DIV  = '0,
  parameter logic [N-T-1:0] CELL = '0
) (
  input  logic [N-1:0] l,
  output logic         g
);
  logic g1, g2;
  always_comb begin
    g1 = (l[N-1 -: T] != DIV);
    g2 = (l[N-T-1:0] == CELL);
    g  = g1 | g2;
  end

  initial begin
    assert (T >= 1 && T <= N - 1)
      else $error("gas_g_comp: T=%0d outside 1..N-1", T);
  end
endmodule
