// tb_gas_lock_profiles -- the 25-bit configurations of the published
// corruptibility and area study, measured over all 2^25 inputs.
//
// Configurations: non-complementary t = 2, 3, 8, 15 and complementary
// t = 3, 8, 15.  For each one three keys are swept over every input:
//   zero keys      -> |F^T| and |G^T| (true-set sizes; for t = 2 these
//                     give the last gate's ADS of about 0.25),
//   a right key    -> 0 wrong outputs,
//   a wrong key of the high class -> 2^(n-t) (non-comp) or 2^(n-t)-1 (comp)
//   wrong outputs, and a wrong key of the low class -> 1 wrong output.
module tb_gas_lock_profiles
  import gas_pkg::*;
;
  localparam int N = 25;
  localparam int NC = 7;
  localparam int           TS [NC] = '{2, 3, 8, 15, 3, 8, 15};
  localparam gas_variant_e VS [NC] = '{GAS_NONCOMP, GAS_NONCOMP, GAS_NONCOMP, GAS_NONCOMP,
                                       GAS_COMP, GAS_COMP, GAS_COMP};

  logic [N-6:0] xhi;
  logic [N-1:0] kf [NC], kg [NC];
  logic         sample, clear;
  longint       n_wrong [NC], n_f [NC], n_g [NC];
  int checks = 0, failures = 0;

  for (genvar c = 0; c < NC; c++) begin : g_cfg
    gas_lock_sweep #(.N(N), .T(TS[c]), .VARIANT(VS[c])) u_sw
      (.xhi(xhi), .k_f(kf[c]), .k_g(kg[c]), .sample(sample), .clear(clear),
       .n_wrong(n_wrong[c]), .n_f(n_f[c]), .n_g(n_g[c]));
  end

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sweep_all();
    clear = 1; #1; clear = 0;
    for (int h = 0; h < (1 << (N - 5)); h++) begin
      xhi = (N-5)'(h);
      #1 sample = 1;
      #1 sample = 0;
    end
  endtask

  task automatic expect_eq(input string what, input int c, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("cfg %0d (t=%0d %s) %s: got %0d expected %0d", c, TS[c], VS[c].name(), what, got, exp);
    end
  endtask

  initial begin
    gas_vec_t base;
    sample = 0; clear = 0; xhi = '0;
    // 1. zero keys: true-set sizes
    for (int c = 0; c < NC; c++) begin kf[c] = '0; kg[c] = '0; end
    sweep_all();
    for (int c = 0; c < NC; c++) begin
      expect_eq("|F^T|", c, n_f[c], longint'(f_true_size(VS[c], N, TS[c])));
      expect_eq("|G^T|", c, n_g[c], longint'(g_true_size(VS[c], N, TS[c])));
      $display("t=%0d %-11s |F^T|=%0d |G^T|=%0d ADS of last gate=%0.4f", TS[c], VS[c].name(),
               n_f[c], n_g[c], (real'(n_g[c]) - real'(n_f[c])) / real'(64'd1 << N));
    end
    // 2. right keys
    for (int c = 0; c < NC; c++) begin
      base = gas_vec_t'($urandom);
      kf[c] = N'(base);
      kg[c] = N'(right_kg(VS[c], N, TS[c], N - TS[c], '0, '0, base, gas_vec_t'($urandom)));
    end
    sweep_all();
    for (int c = 0; c < NC; c++) expect_eq("right key wrong outputs", c, n_wrong[c], 0);
    // 3. high-class wrong keys: K_f and K_g differ in the top column bit (never
    //    bit q for the non-complementary lock, since q = n-t here)
    for (int c = 0; c < NC; c++) kg[c] = kf[c] ^ N'(1 << (N - 1));
    sweep_all();
    for (int c = 0; c < NC; c++) begin
      expect_eq("high-class corruptibility", c, n_wrong[c], longint'(high_corruptibility(VS[c], N, TS[c])));
      $display("t=%0d %-11s high-class key corrupts %0d inputs", TS[c], VS[c].name(), n_wrong[c]);
    end
    // 4. low-class wrong keys: K_f and K_g differ only in row bit 0
    for (int c = 0; c < NC; c++) kg[c] = kf[c] ^ N'(1);
    sweep_all();
    for (int c = 0; c < NC; c++) expect_eq("low-class corruptibility", c, n_wrong[c], 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
