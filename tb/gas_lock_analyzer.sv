// gas_lock_analyzer -- exhaustive key/input analysis of one small gas_lock
// configuration, used by the end-to-end testbench.
//
// It instantiates 2^N copies of the lock, one per input pattern X, so that a
// single key evaluates the whole input space in one step.  For every one of
// the 2^(2N) keys it records the set of inputs that give a wrong output and:
//   * compares every output with an independent set-membership model,
//   * checks that a key is a right key exactly when the construction rule
//     (gas_pkg::is_right_key) says so,
//   * sorts wrong keys into the two corruptibility classes and compares the
//     class sizes with the closed forms (gas_pkg::*_corrupt_keys).
// It then replays an idealised oracle-guided SAT attack on the recorded
// tables: while two surviving keys disagree on some input, that input is a
// distinguishing input; the oracle (correct output) removes every key that
// is wrong there.  The construction guarantees that all 2^N inputs must be
// used, and that only right keys survive.  Results are reported on ports.
module gas_lock_analyzer
  import gas_pkg::*;
#(
  parameter int unsigned    N         = 6,
  parameter int unsigned    T         = 2,
  parameter gas_variant_e   VARIANT   = GAS_NONCOMP,
  parameter gas_type_e      LOCK_TYPE = GAS_TYPE0,
  parameter logic [T-1:0]   COL       = '0,
  parameter logic [N-T-1:0] CELL      = '0,
  parameter int unsigned    Q         = N - T,
  parameter logic [N-1:0]   XNOR_F    = '0,
  parameter logic [N-1:0]   XNOR_G    = '0
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_right,
  output int   n_low,
  output int   n_high,
  output int   lambda
);
  localparam int unsigned NX = 1 << N;
  localparam int unsigned NK = 1 << (2 * N);
  localparam logic CORRECT = (LOCK_TYPE == GAS_TYPE1);

  logic [N-1:0]  kf, kg;
  logic [NX-1:0] yv;

  for (genvar xi = 0; xi < NX; xi++) begin : g_x
    gas_lock #(.N(N), .T(T), .VARIANT(VARIANT), .LOCK_TYPE(LOCK_TYPE), .COL(COL),
               .CELL(CELL), .Q(Q), .XNOR_F(XNOR_F), .XNOR_G(XNOR_G))
      u_lock (.x(N'(xi)), .k_f(kf), .k_g(kg), .y(yv[xi]));
  end

  // Independent model: membership of L in the true sets, from the K-map
  // description (column = top T bits, row = low N-T bits).
  function automatic logic in_g(logic [N-1:0] l);
    logic [T-1:0] c;
    c = l[N-1:N-T];
    if (VARIANT == GAS_NONCOMP)
      return (c != COL && c != (COL ^ (T'(1) << (Q - (N - T))))) || (l == {COL, CELL});
    return (c != COL) || (l == {COL, CELL});
  endfunction

  function automatic logic in_f(logic [N-1:0] l);
    if (VARIANT == GAS_NONCOMP) return l[N-1:N-T] == COL;
    return !in_g(l);
  endfunction

  function automatic logic ref_y(logic [N-1:0] x, logic [N-1:0] f_key, logic [N-1:0] g_key);
    logic y0;
    y0 = in_f(x ^ f_key ^ XNOR_F) && in_g(x ^ g_key ^ XNOR_G);
    return (LOCK_TYPE == GAS_TYPE1) ? !y0 : y0;
  endfunction

  logic [NX-1:0] wrongs [NK];
  bit            alive  [NK];
  int            cnt    [NX];

  initial begin
    longint unsigned high_e, sum_e;
    int e, alive_n, pick;
    logic rk;
    done = 0; checks = 0; failures = 0;
    n_right = 0; n_low = 0; n_high = 0; lambda = 0; sum_e = 0;
    high_e = high_corruptibility(VARIANT, N, T);
    for (int key = 0; key < NK; key++) begin
      {kf, kg} = (2 * N)'(key);
      #1;
      wrongs[key] = yv ^ {NX{CORRECT}};
      for (int x = 0; x < NX; x++) begin
        checks++;
        if (yv[x] !== ref_y(N'(x), kf, kg))
          begin failures++; if (failures < 20) $display("y mismatch x=%0d kf=%0d kg=%0d", x, kf, kg); end
      end
      e = $countones(wrongs[key]);
      sum_e += 64'(e);
      rk = is_right_key(VARIANT, N, T, Q, gas_vec_t'(XNOR_F), gas_vec_t'(XNOR_G),
                        gas_vec_t'(kf), gas_vec_t'(kg));
      checks++;
      if (rk != (e == 0)) begin failures++; if (failures < 20) $display("right-key rule kf=%0d kg=%0d e=%0d", kf, kg, e); end
      if (e == 0) n_right++;
      else if (e == 1) n_low++;
      else if (e == int'(high_e)) n_high++;
      else begin failures++; if (failures < 20) $display("corruptibility %0d outside both classes", e); end
    end
    checks += 3;
    if (n_right != int'(right_keys(VARIANT, N, T))) begin failures++; if (failures < 20) $display("right keys %0d", n_right); end
    if (n_low != int'(low_corrupt_keys(VARIANT, N, T))) begin failures++; if (failures < 20) $display("low-e keys %0d", n_low); end
    if (n_high != int'(high_corrupt_keys(VARIANT, N, T))) begin failures++; if (failures < 20) $display("high-e keys %0d", n_high); end
    $display("[N=%0d T=%0d %s %s] right=%0d low(e=1)=%0d high(e=%0d)=%0d avg e over wrong keys=%0.2f",
             N, T, VARIANT.name(), LOCK_TYPE.name(), n_right, n_low, high_e, n_high,
             real'(sum_e) / real'(NK - n_right));

    // Idealised SAT attack on the recorded tables.
    alive_n = NK;
    for (int x = 0; x < NX; x++) cnt[x] = 0;
    for (int key = 0; key < NK; key++) begin
      alive[key] = 1;
      for (int x = 0; x < NX; x++) cnt[x] += int'(wrongs[key][x]);
    end
    forever begin
      pick = -1;
      for (int x = 0; x < NX; x++)
        if (cnt[x] > 0 && cnt[x] < alive_n) begin pick = x; break; end
      if (pick < 0) break;
      lambda++;
      for (int key = 0; key < NK; key++)
        if (alive[key] && wrongs[key][pick]) begin
          alive[key] = 0;
          alive_n--;
          for (int x = 0; x < NX; x++) cnt[x] -= int'(wrongs[key][x]);
        end
    end
    checks += 2;
    if (lambda != int'(NX)) begin failures++; if (failures < 20) $display("SAT attack needed %0d iterations, expected %0d", lambda, NX); end
    if (alive_n != n_right) begin failures++; if (failures < 20) $display("%0d keys survive, %0d right keys", alive_n, n_right); end
    $display("[N=%0d T=%0d %s %s] SAT attack iterations=%0d, surviving keys=%0d",
             N, T, VARIANT.name(), LOCK_TYPE.name(), lambda, alive_n);
    done = 1;
  end
endmodule
