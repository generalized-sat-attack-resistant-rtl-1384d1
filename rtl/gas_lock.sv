// gas_lock -- Generalized Anti-SAT (G-Anti-SAT) logic-locking block.
//
// The block takes the n primary inputs X that it protects and 2n key bits
// split into K_f and K_g.  Two key-gate layers form L_f = X ^ K_f and
// L_g = X ^ K_g; two function blocks evaluate f(L_f) and g(L_g); a last gate
// combines them into y.  With a right key y is constant (0 for type-0, 1 for
// type-1); with a wrong key y takes the wrong value on a set of inputs whose
// size is the key's corruptibility.  y is meant to be XORed into an internal
// net of the host circuit, which then computes its function only under a
// right key.
//
// VARIANT selects the function pair:
//   GAS_NONCOMP  f = one K-map column (gas_f_noncomp), g = 2^t-2 columns plus
//                one cell of f's column (gas_g_noncomp).  Right keys: K_f and
//                K_g equal on column bits except bit Q, where they differ.
//   GAS_COMP     g = 2^t-1 columns plus one cell (gas_g_comp), f = ~g built
//                from a second copy of the same logic.  Right keys: K_f = K_g
//                (up to the XNOR masks).
// LOCK_TYPE selects the last gate:
//   GAS_TYPE0    y = f & g, correct output 0 (the form analysed in detail).
//   GAS_TYPE1    y = ~f | ~g, correct output 1.  The published text only says
//                the last gate becomes an OR and that the type-1 constraints
//                are those of type-0 with true and false sets swapped; this
//                design meets them by complementing both type-0 functions,
//                so the right keys are the same as for type-0.
// Defaults: non-complementary, type-0, n = 25, t = 3 -- the input width of the
// published corruptibility study and the t of the published area tables.
// COL/CELL/Q (or DIV/CELL) = 0/0/N-T are this design's choice of the
// K-map column, common cell and bit q; any legal value works.
//
// Interface: x, k_f, k_g in; y out.  Purely combinational: no clock, no
// reset, y settles a few gate delays after any input changes.
module gas_lock
  import gas_pkg::*;
#(
  parameter int unsigned    N         = 25,
  parameter int unsigned    T         = 3,
  parameter gas_variant_e   VARIANT   = GAS_NONCOMP,
  parameter gas_type_e      LOCK_TYPE = GAS_TYPE0,
  parameter logic [T-1:0]   COL       = '0,      // f column (NONCOMP) / dividing column (COMP)
  parameter logic [N-T-1:0] CELL      = '0,      // row of the shared / split cell
  parameter int unsigned    Q         = N - T,   // NONCOMP only: column bit that keys differ in
  parameter logic [N-1:0]   XNOR_F    = '0,      // key gates of f that are XNOR
  parameter logic [N-1:0]   XNOR_G    = '0       // key gates of g that are XNOR
) (
  input  logic [N-1:0] x,     // protected primary inputs X = [x1..xn]
  input  logic [N-1:0] k_f,   // key bits k1..kn
  input  logic [N-1:0] k_g,   // key bits k(n+1)..k(2n)
  output logic         y      // block output
);
  logic [N-1:0] l_f, l_g;
  logic         f0, g0;       // type-0 functions f(L_f), g(L_g)

  gas_key_gate #(.N(N), .XNOR_MASK(XNOR_F)) u_kg_f (.x(x), .k(k_f), .l(l_f));
  gas_key_gate #(.N(N), .XNOR_MASK(XNOR_G)) u_kg_g (.x(x), .k(k_g), .l(l_g));

  if (VARIANT == GAS_NONCOMP) begin : g_noncomp
    gas_f_noncomp #(.N(N), .T(T), .COL(COL)) u_f (.l(l_f), .f(f0));
    gas_g_noncomp #(.N(N), .T(T), .COL(COL), .CELL(CELL), .Q(Q)) u_g (.l(l_g), .g(g0));
  end else begin : g_comp
    logic g_of_lf;
    gas_g_comp #(.N(N), .T(T), .DIV(COL), .CELL(CELL)) u_f (.l(l_f), .g(g_of_lf));
    gas_g_comp #(.N(N), .T(T), .DIV(COL), .CELL(CELL)) u_g (.l(l_g), .g(g0));
    assign f0 = ~g_of_lf;
  end

  // Last gate G.
  always_comb begin
    if (LOCK_TYPE == GAS_TYPE0) y = f0 & g0;
    else                        y = (~f0) | (~g0);
  end
endmodule
