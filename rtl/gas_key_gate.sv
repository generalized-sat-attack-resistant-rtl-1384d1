// gas_key_gate -- the key-gate layer in front of one G-Anti-SAT function block.
//
// Each data bit x[i] is combined with its own key bit k[i] to form the
// function input l[i].  By default every key gate is an XOR, so l = x ^ k,
// exactly as drawn in front of both function blocks of the lock.  Setting a
// bit of XNOR_MASK turns that key gate into an XNOR (l[i] = ~(x[i]^k[i])); the
// published design mentions this substitution as a way to stop the all-0 /
// all-1 key guess on the complementary lock, and leaves the choice of
// positions open, so the default here is all XOR.
// Purely combinational, no clock; output valid one gate delay after inputs.
module gas_key_gate #(
  parameter int unsigned    N         = 25,
  parameter logic [N-1:0]   XNOR_MASK = '0
) (
  input  logic [N-1:0] x,   // primary data inputs X
  input  logic [N-1:0] k,   // key bits of this function block
  output logic [N-1:0] l    // function input L
);
  always_comb l = x ^ k ^ XNOR_MASK;
endmodule
