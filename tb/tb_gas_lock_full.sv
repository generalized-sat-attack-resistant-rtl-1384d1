// tb_gas_lock_full -- the lock at its default size (n = 25, t = 3,
// non-complementary, type-0) taken through one complete locking operation.
//
// 32 copies of the default gas_lock share the key and the upper 20 input
// bits; copy i fixes the low 5 bits to i, so one step covers 32 inputs and
// a full sweep of all 2^25 inputs takes 2^20 steps.
//   1. Random right keys built with the published rule give y = 0 on
//      random inputs.
//   2. Random keys on random inputs match an independent set model.
//   3. Full sweeps count the inputs with a wrong output for a right key (0),
//      a low-corruptibility wrong key (K_f, K_g equal on the column bits: 1)
//      and a high-corruptibility wrong key (column bits differ off bit q:
//      2^22), as in the corruptibility table for n = 25, t = 3.
module tb_gas_lock_full
  import gas_pkg::*;
;
  localparam int N = 25, T = 3, Q = N - T;
  localparam int COPIES = 32;

  logic [N-1:0]      kf, kg;
  logic [N-6:0]      xhi;
  logic [COPIES-1:0] yv;
  int checks = 0, failures = 0;

  for (genvar i = 0; i < COPIES; i++) begin : g_c
    gas_lock u_lock (.x({xhi, 5'(i)}), .k_f(kf), .k_g(kg), .y(yv[i]));
  end

  function automatic logic ref_y(logic [N-1:0] x, logic [N-1:0] f_key, logic [N-1:0] g_key);
    logic [N-1:0] lf, lg;
    lf = x ^ f_key; lg = x ^ g_key;
    return (lf[N-1:N-T] == 0) &&
           ((lg[N-1:N-T] != 0 && lg[N-1:N-T] != 3'b001) || lg == 0);
  endfunction

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sweep(output int wrong);
    wrong = 0;
    for (int h = 0; h < (1 << (N - 5)); h++) begin
      xhi = (N-5)'(h);
      #1;
      wrong += $countones(yv);
    end
  endtask

  initial begin
    int wrong, n_unlock;
    n_unlock = 0;
    // 1. right keys
    for (int r = 0; r < 64; r++) begin
      kf = N'($urandom);
      kg = N'(right_kg(GAS_NONCOMP, N, T, Q, '0, '0, gas_vec_t'(kf), gas_vec_t'($urandom)));
      for (int s = 0; s < 64; s++) begin
        xhi = (N-5)'($urandom);
        #1;
        checks++;
        if (yv !== '0) begin failures++; $display("right key kf=%h kg=%h gave y=1", kf, kg); end
        else n_unlock++;
      end
    end
    // 2. random keys against the model
    for (int r = 0; r < 4000; r++) begin
      kf = N'($urandom); kg = N'($urandom); xhi = (N-5)'($urandom);
      if (r % 2 == 0) kg[N-1:N-T] = kf[N-1:N-T] ^ 3'(1 << ($urandom % 3));
      #1;
      for (int i = 0; i < COPIES; i++) begin
        checks++;
        if (yv[i] !== ref_y({xhi, 5'(i)}, kf, kg)) begin
          failures++; $display("model mismatch kf=%h kg=%h x=%h", kf, kg, {xhi, 5'(i)});
        end
      end
    end
    // 3. full sweeps
    kf = 25'h1A2_B3C4; kg = 25'h1A2_B3C4 ^ 25'h040_0000 ^ 25'h00F_0F0F;   // right key
    sweep(wrong);
    checks++; if (wrong != 0) begin failures++; $display("right key: %0d wrong outputs", wrong); end
    $display("right key            : %0d of 2^25 inputs wrong", wrong);
    kg = 25'h1A2_B3C4 ^ 25'h012_3456;                                      // column bits equal
    sweep(wrong);
    checks++; if (wrong != 1) begin failures++; $display("low-e key: %0d wrong outputs", wrong); end
    $display("low-corruptibility   : %0d of 2^25 inputs wrong (expected 1)", wrong);
    kg = 25'h1A2_B3C4 ^ 25'h080_0000;                                      // differs in bit 23
    sweep(wrong);
    checks++; if (wrong != (1 << (N - T))) begin failures++; $display("high-e key: %0d wrong outputs", wrong); end
    $display("high-corruptibility  : %0d of 2^25 inputs wrong (expected %0d)", wrong, 1 << (N - T));
    checks++; if (n_unlock == 0) begin failures++; $display("no unlock observed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
