// tb_gas_f_noncomp -- self-checking test of f of the non-complementary lock.
// (a) the 4-bit worked example: F^T = K-map column l3l2=00 = {0,1,2,3};
// (b) an 8-bit block, t=3, column 101: exhaustive, F^T = {160..191};
// (c) the default 25-bit block: random inputs plus the true-set size 2^22
//     counted over all inputs whose row bits are zero (one per column).
module tb_gas_f_noncomp;
  logic [3:0]  l4;  logic f4;
  logic [7:0]  l8;  logic f8;
  logic [24:0] l25; logic f25;
  int checks = 0, failures = 0;

  gas_f_noncomp #(.N(4), .T(2), .COL(2'b00))  dut4  (.l(l4),  .f(f4));
  gas_f_noncomp #(.N(8), .T(3), .COL(3'b101)) dut8  (.l(l8),  .f(f8));
  gas_f_noncomp                               dut25 (.l(l25), .f(f25));

  task automatic chk(input logic got, input logic exp, input string what, input int v);
    checks++;
    if (got !== exp) begin failures++; $display("%s: input %0d got %0b exp %0b", what, v, got, exp); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt;
    cnt = 0;
    for (int v = 0; v < 16; v++) begin
      l4 = 4'(v); #1;
      chk(f4, v inside {0, 1, 2, 3}, "n4", v);
      cnt += f4;
    end
    checks++; if (cnt != 4) begin failures++; $display("n4 |F^T|=%0d", cnt); end
    cnt = 0;
    for (int v = 0; v < 256; v++) begin
      l8 = 8'(v); #1;
      chk(f8, (v >= 160 && v < 192), "n8", v);
      cnt += f8;
    end
    checks++; if (cnt != 32) begin failures++; $display("n8 |F^T|=%0d", cnt); end
    for (int it = 0; it < 2000; it++) begin
      l25 = 25'($urandom);
      if (it % 4 == 0) l25[24:22] = 3'b000;
      #1;
      chk(f25, (l25 < 25'd4194304), "n25", int'(l25));
    end
    // exactly one of the 8 columns is true
    cnt = 0;
    for (int c = 0; c < 8; c++) begin
      l25 = {3'(c), 22'($urandom)}; #1; cnt += f25;
    end
    checks++; if (cnt != 1) begin failures++; $display("n25 columns true=%0d", cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
