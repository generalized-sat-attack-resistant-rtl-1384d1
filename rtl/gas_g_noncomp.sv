// gas_g_noncomp -- function g of the non-complementary G-Anti-SAT lock.
//
// Same K-map view as gas_f_noncomp (rows = l[n-t-1:0], columns = l[n-1:n-t]).
// f owns column COL.  g is built from two product terms:
//   g1: every column that differs from COL in some column bit other than
//       bit Q -- that is all 2^t columns except COL and its neighbour across
//       bit Q (2^t-2 columns).  g1 is an OR of t-1 literals.
//   g2: the single "common cell" of column COL whose row label is CELL,
//       written as (l[Q] == COL bit Q) & (row == CELL); the l[Q] literal lets
//       it merge with the g1 columns.
// g = g1 | g2, |G^T| = 2^n - 2^(n-t+1) + 1.  The neighbour column that g
// leaves out is what makes the right keys exist; the one shared cell is what
// keeps every input a distinguishing input for the SAT attack.
// Q must lie in N-T .. N-1 (a column bit).  Defaults (COL = 0, CELL = 0) are
// the case the published equations are written for; Q = N-T matches the
// worked 4-bit example.  Combinational, no clock.
module gas_g_noncomp #(
  parameter int unsigned    N    = 25,
  parameter int unsigned    T    = 3,
  parameter logic [T-1:0]   COL  = '0,
  parameter logic [N-T-1:0] CELL = '0,
  parameter int unsigned    Q    = N - T
) (
  input  logic [N-1:0] l,
  output logic         g
);
  localparam int unsigned QC = Q - (N - T);             // bit q inside the column label
  localparam logic [T-1:0] KEEP = ~(T'(1) << QC);       // column bits used by g1

  logic g1, g2;
  always_comb begin
    g1 = |((l[N-1 -: T] ^ COL) & KEEP);
    g2 = (l[Q] == COL[QC]) && (l[N-T-1:0] == CELL);
    g  = g1 | g2;
  end

  initial begin
    assert (T >= 2 && T <= N - 1)
      else $error("gas_g_noncomp: T=%0d outside 2..N-1", T);
    assert (Q >= N - T && Q <= N - 1)
      else $error("gas_g_noncomp: Q=%0d is not a column bit", Q);
  end
endmodule
