// gas_lock_sweep -- full-input-space measurement of one 25-bit gas_lock
// configuration, used by tb_gas_lock_profiles.
//
// 32 copies of the lock share the key and the upper N-5 input bits (driven
// by the parent through xhi); copy i fixes the low 5 bits to i.  While the
// parent steps xhi through all 2^(N-5) values, the module counts how many
// inputs give y != correct output (the corruptibility of the applied key)
// and how many make the type-0 functions f and g true (|F^T| and |G^T| when
// the keys are zero).  The counts are cleared when clear is pulsed.
module gas_lock_sweep
  import gas_pkg::*;
#(
  parameter int unsigned  N       = 25,
  parameter int unsigned  T       = 3,
  parameter gas_variant_e VARIANT = GAS_NONCOMP
) (
  input  logic [N-6:0]  xhi,
  input  logic [N-1:0]  k_f,
  input  logic [N-1:0]  k_g,
  input  logic          sample,   // pulse after xhi settles
  input  logic          clear,
  output longint        n_wrong,
  output longint        n_f,
  output longint        n_g
);
  localparam int COPIES = 32;
  logic [COPIES-1:0] yv, fv, gv;

  for (genvar i = 0; i < COPIES; i++) begin : g_c
    gas_lock #(.N(N), .T(T), .VARIANT(VARIANT)) u_lock
      (.x({xhi, 5'(i)}), .k_f(k_f), .k_g(k_g), .y(yv[i]));
    assign fv[i] = u_lock.f0;
    assign gv[i] = u_lock.g0;
  end

  always @(posedge clear) begin
    n_wrong = 0; n_f = 0; n_g = 0;
  end

  always @(posedge sample) begin
    n_wrong += longint'($countones(yv));
    n_f     += longint'($countones(fv));
    n_g     += longint'($countones(gv));
  end
endmodule
