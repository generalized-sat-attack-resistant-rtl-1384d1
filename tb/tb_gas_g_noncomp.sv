// tb_gas_g_noncomp -- self-checking test of g of the non-complementary lock.
// (a) the 4-bit worked example: F^T = column 00, common cell 3, left-out
//     column 01, so G^T = {3, 8..15};
// (b) an 8-bit block, t=3, column 101, common row 10010, q = 7, exhaustive
//     against the set definition: all columns except 101 and 001, plus the
//     cell (101, 10010); |G^T| = 256 - 64 + 1 = 193;
// (c) the default 25-bit block (t=3, column 0, row 0, q=22) on random inputs
//     and on the corner cells.
module tb_gas_g_noncomp;
  logic [3:0]  l4;  logic g4;
  logic [7:0]  l8;  logic g8;
  logic [24:0] l25; logic g25;
  int checks = 0, failures = 0;

  gas_g_noncomp #(.N(4), .T(2), .COL(2'b00), .CELL(2'b11), .Q(2)) dut4 (.l(l4), .g(g4));
  gas_g_noncomp #(.N(8), .T(3), .COL(3'b101), .CELL(5'b10010), .Q(7)) dut8 (.l(l8), .g(g8));
  gas_g_noncomp dut25 (.l(l25), .g(g25));

  task automatic chk(input logic got, input logic exp, input string what, input int v);
    checks++;
    if (got !== exp) begin failures++; $display("%s: input %0d got %0b exp %0b", what, v, got, exp); end
  endtask

  function automatic logic ref8(int v);
    int col, row;
    col = v >> 5; row = v & 31;
    return (col != 5 && col != 1) || (col == 5 && row == 18);
  endfunction

  function automatic logic ref25(logic [24:0] v);
    int col;
    col = int'(v[24:22]);
    return (col != 0 && col != 1) || (v == '0);
  endfunction

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
      chk(g4, v inside {3, 8, 9, 10, 11, 12, 13, 14, 15}, "n4", v);
      cnt += g4;
    end
    checks++; if (cnt != 9) begin failures++; $display("n4 |G^T|=%0d", cnt); end
    cnt = 0;
    for (int v = 0; v < 256; v++) begin
      l8 = 8'(v); #1;
      chk(g8, ref8(v), "n8", v);
      cnt += g8;
    end
    checks++; if (cnt != 193) begin failures++; $display("n8 |G^T|=%0d", cnt); end
    for (int it = 0; it < 3000; it++) begin
      l25 = 25'($urandom);
      case (it % 6)
        0: l25[24:22] = 3'b000;
        1: l25[24:22] = 3'b001;
        2: l25 = '0;
        3: l25 = 25'h40_0000;          // column 001, row 0: left-out column
        default: ;
      endcase
      #1;
      chk(g25, ref25(l25), "n25", int'(l25));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
