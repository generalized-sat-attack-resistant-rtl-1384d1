// tb_gas_g_comp -- self-checking test of g of the complementary lock.
// (a) 4-bit, t=1 (two 8-cell columns), dividing column l3=0, split cell 0:
//     G^T = {0, 8..15}, so F^T = ~G^T = {1..7} (the |F^T| = 2^(n-1)-1 case);
// (b) 8-bit, t=3, dividing column 110, split cell row 01001, exhaustive
//     against the set definition; |G^T| = 256 - 32 + 1 = 225;
// (c) default 25-bit block on random and corner inputs.
module tb_gas_g_comp;
  logic [3:0]  l4;  logic g4;
  logic [7:0]  l8;  logic g8;
  logic [24:0] l25; logic g25;
  int checks = 0, failures = 0;

  gas_g_comp #(.N(4), .T(1), .DIV(1'b0), .CELL(3'b000))   dut4 (.l(l4), .g(g4));
  gas_g_comp #(.N(8), .T(3), .DIV(3'b110), .CELL(5'b01001)) dut8 (.l(l8), .g(g8));
  gas_g_comp dut25 (.l(l25), .g(g25));

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
      chk(g4, v inside {0, [8:15]}, "n4", v);
      cnt += g4;
    end
    checks++; if (cnt != 9) begin failures++; $display("n4 |G^T|=%0d", cnt); end
    cnt = 0;
    for (int v = 0; v < 256; v++) begin
      l8 = 8'(v); #1;
      chk(g8, ((v >> 5) != 6) || ((v & 31) == 9), "n8", v);
      cnt += g8;
    end
    checks++; if (cnt != 225) begin failures++; $display("n8 |G^T|=%0d", cnt); end
    for (int it = 0; it < 3000; it++) begin
      l25 = 25'($urandom);
      if (it % 3 == 0) l25[24:22] = 3'b000;
      if (it % 7 == 0) l25[21:0] = '0;
      #1;
      chk(g25, (l25[24:22] != 0) || (l25[21:0] == 0), "n25", int'(l25));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
