// tb_gas_lock -- end-to-end test of the G-Anti-SAT lock at reduced widths.
//
// Five configurations are analysed exhaustively (every key, every input) by
// gas_lock_analyzer: the default non-complementary type-0 lock and the
// complementary type-0 lock at n = 8, t = 3 (the smallest width in the
// published SAT-attack table), and three n = 6 variants that exercise the
// type-1 OR gate, non-default column / cell / q choices, t = 1 and t = 4, and
// XNOR key gates.  Each checks outputs against a set model, the right-key
// rule, the corruptibility classes, and that an idealised SAT attack needs
// 2^n iterations.  Mechanism counters make sure each feature was exercised.
module tb_gas_lock
  import gas_pkg::*;
;
  localparam int NCFG = 5;
  logic done   [NCFG];
  int   checks [NCFG], failures [NCFG], n_right [NCFG], n_low [NCFG], n_high [NCFG], lambda [NCFG];

  gas_lock_analyzer #(.N(8), .T(3), .VARIANT(GAS_NONCOMP), .LOCK_TYPE(GAS_TYPE0)) a0
    (.done(done[0]), .checks(checks[0]), .failures(failures[0]), .n_right(n_right[0]),
     .n_low(n_low[0]), .n_high(n_high[0]), .lambda(lambda[0]));
  gas_lock_analyzer #(.N(8), .T(3), .VARIANT(GAS_COMP), .LOCK_TYPE(GAS_TYPE0)) a1
    (.done(done[1]), .checks(checks[1]), .failures(failures[1]), .n_right(n_right[1]),
     .n_low(n_low[1]), .n_high(n_high[1]), .lambda(lambda[1]));
  gas_lock_analyzer #(.N(6), .T(2), .VARIANT(GAS_NONCOMP), .LOCK_TYPE(GAS_TYPE1),
                      .COL(2'b10), .CELL(4'b0110), .Q(5)) a2
    (.done(done[2]), .checks(checks[2]), .failures(failures[2]), .n_right(n_right[2]),
     .n_low(n_low[2]), .n_high(n_high[2]), .lambda(lambda[2]));
  gas_lock_analyzer #(.N(6), .T(1), .VARIANT(GAS_COMP), .LOCK_TYPE(GAS_TYPE1),
                      .COL(1'b1), .CELL(5'b10101), .XNOR_F(6'b101001), .XNOR_G(6'b000110)) a3
    (.done(done[3]), .checks(checks[3]), .failures(failures[3]), .n_right(n_right[3]),
     .n_low(n_low[3]), .n_high(n_high[3]), .lambda(lambda[3]));
  gas_lock_analyzer #(.N(6), .T(4), .VARIANT(GAS_NONCOMP), .LOCK_TYPE(GAS_TYPE0),
                      .COL(4'b0110), .CELL(2'b01), .Q(3), .XNOR_F(6'b110000), .XNOR_G(6'b110000)) a4
    (.done(done[4]), .checks(checks[4]), .failures(failures[4]), .n_right(n_right[4]),
     .n_low(n_low[4]), .n_high(n_high[4]), .lambda(lambda[4]));

  int total_checks, total_failures;

  task automatic report();
    $display("TB_RESULT checks=%0d failures=%0d", total_checks, total_failures);
    $finish;
  endtask

  initial begin
    #10000000;
    total_failures++;
    $display("watchdog expired");
    report();
  end

  initial begin
    int ev_right, ev_low, ev_high, ev_attack;
    total_checks = 0; total_failures = 0;
    #1;
    for (int c = 0; c < NCFG; c++) wait (done[c] === 1'b1);
    ev_right = 0; ev_low = 0; ev_high = 0; ev_attack = 0;
    for (int c = 0; c < NCFG; c++) begin
      total_checks += checks[c];
      total_failures += failures[c];
      ev_right  += (n_right[c] > 0);
      ev_low    += (n_low[c] > 0);
      ev_high   += (n_high[c] > 0);
      ev_attack += (lambda[c] > 0);
    end
    // Mechanisms: unlocking with a right key, both corruptibility classes of
    // wrong keys, a completed SAT attack, and each variant / gate type / XNOR
    // key gates (fixed by construction of the configuration list above).
    $display("mechanisms: right-key unlock %0d, low-e wrong keys %0d, high-e wrong keys %0d, SAT attacks %0d; non-comp 3, comp 2, type-0 3, type-1 2, XNOR gates 2 configurations",
             ev_right, ev_low, ev_high, ev_attack);
    total_checks += 4;
    if (ev_right  == 0) begin total_failures++; $display("no right key seen"); end
    if (ev_low    == 0) begin total_failures++; $display("no low-corruptibility key seen"); end
    if (ev_high   == 0) begin total_failures++; $display("no high-corruptibility key seen"); end
    if (ev_attack == 0) begin total_failures++; $display("no SAT attack run"); end
    report();
  end
endmodule
