// gas_pkg -- shared types and design-time helpers for the G-Anti-SAT lock.
//
// The lock itself is pure combinational logic; this package holds what the
// modules and testbenches share: the two enums that pick the lock variant
// (non-complementary or complementary f/g pair) and the output-gate type
// (type-0 AND, type-1 OR), and constant functions that apply the published
// construction rules: the size of each true set, the rule that makes a key
// pair a right key, and the two corruptibility classes of wrong keys.
// All functions work on vectors of up to GAS_MAX_N bits so they can be used
// with any lock width; the width actually in use is passed as an argument.
// The formulas follow the published construction; the 32-bit limit and the
// function names are this implementation's own.
package gas_pkg;

  localparam int unsigned GAS_MAX_N = 32;
  typedef logic [GAS_MAX_N-1:0] gas_vec_t;

  // Which pair of functions sits behind the key gates.
  typedef enum logic {
    GAS_NONCOMP = 1'b0,  // f = one K-map column, g = 2^t-2 columns + one cell
    GAS_COMP    = 1'b1   // g = 2^t-1 columns + one cell, f = ~g
  } gas_variant_e;

  // Which gate combines f and g (and what the correct output is).
  typedef enum logic {
    GAS_TYPE0 = 1'b0,    // AND gate, correct output 0
    GAS_TYPE1 = 1'b1     // OR gate on the complemented functions, correct output 1
  } gas_type_e;

  // Correct (unlocked) output of the block for a given type.
  function automatic logic correct_output(gas_type_e ty);
    return (ty == GAS_TYPE1);
  endfunction

  // |F^T| and |G^T| of the type-0 functions, for an n-bit lock with parameter t.
  function automatic longint unsigned f_true_size(gas_variant_e v, int n, int t);
    return (v == GAS_NONCOMP) ? (64'd1 << (n - t)) : ((64'd1 << (n - t)) - 1);
  endfunction

  function automatic longint unsigned g_true_size(gas_variant_e v, int n, int t);
    return (v == GAS_NONCOMP) ? ((64'd1 << n) - (64'd1 << (n - t + 1)) + 1)
                              : ((64'd1 << n) - (64'd1 << (n - t)) + 1);
  endfunction

  // Right-key rule. Non-complementary: K_f and K_g agree on the column
  // bits n-t..n-1 except bit q, where they differ; the row bits are free.
  // Complementary: K_f xor K_g equals the xor of the two XNOR masks (all-zero
  // masks give the classic K_f == K_g).
  function automatic logic is_right_key(gas_variant_e v, int n, int t, int q,
                                        gas_vec_t xnor_f, gas_vec_t xnor_g,
                                        gas_vec_t kf, gas_vec_t kg);
    gas_vec_t d, colmask;
    d = (kf ^ xnor_f) ^ (kg ^ xnor_g);
    if (v == GAS_COMP) begin
      colmask = (n == GAS_MAX_N) ? '1 : ((gas_vec_t'(1) << n) - 1);
      return (d & colmask) == '0;
    end
    colmask = ((gas_vec_t'(1) << n) - 1) & ~((gas_vec_t'(1) << (n - t)) - 1);
    return (d & colmask) == (gas_vec_t'(1) << q);
  endfunction

  // Builds one right key K_g from K_f; 'free' supplies the row bits that the
  // rule leaves open (non-complementary variant only).
  function automatic gas_vec_t right_kg(gas_variant_e v, int n, int t, int q,
                                        gas_vec_t xnor_f, gas_vec_t xnor_g,
                                        gas_vec_t kf, gas_vec_t free);
    gas_vec_t rowmask, colmask, kg;
    rowmask = (gas_vec_t'(1) << (n - t)) - 1;
    colmask = ((gas_vec_t'(1) << n) - 1) & ~rowmask;
    kg = kf ^ xnor_f ^ xnor_g;
    if (v == GAS_NONCOMP)
      kg = ((kg ^ (gas_vec_t'(1) << q)) & colmask) | (free & rowmask);
    return kg & ((n == GAS_MAX_N) ? '1 : ((gas_vec_t'(1) << n) - 1));
  endfunction

  // The two corruptibility classes of wrong keys (number of inputs giving a
  // wrong output) and how many wrong keys fall in each.
  function automatic longint unsigned high_corruptibility(gas_variant_e v, int n, int t);
    return (v == GAS_NONCOMP) ? (64'd1 << (n - t)) : ((64'd1 << (n - t)) - 1);
  endfunction

  function automatic longint unsigned high_corrupt_keys(gas_variant_e v, int n, int t);
    return (v == GAS_NONCOMP) ? ((64'd1 << (2*n)) - (64'd1 << (2*n - t + 1)))
                              : ((64'd1 << (2*n)) - (64'd1 << (2*n - t)));
  endfunction

  function automatic longint unsigned low_corrupt_keys(gas_variant_e v, int n, int t);
    return (v == GAS_NONCOMP) ? (64'd1 << (2*n - t))
                              : ((64'd1 << (2*n - t)) - (64'd1 << n));
  endfunction

  function automatic longint unsigned right_keys(gas_variant_e v, int n, int t);
    return (v == GAS_NONCOMP) ? (64'd1 << (2*n - t)) : (64'd1 << n);
  endfunction

endpackage
