// tb_gas_key_gate -- self-checking test of the key-gate layer.
// Two instances: all-XOR (default) and a mixed XOR/XNOR mask.  Random x/k
// vectors; each output bit is compared with a bit-by-bit reference
// (XOR, or inverted XOR where the mask bit is set).
module tb_gas_key_gate;
  localparam int unsigned N = 25;
  localparam logic [N-1:0] MASK = 25'h0A5_3C1;

  logic [N-1:0] x, k, l_xor, l_mix;
  int checks = 0, failures = 0;

  gas_key_gate #(.N(N))                    dut_xor (.x(x), .k(k), .l(l_xor));
  gas_key_gate #(.N(N), .XNOR_MASK(MASK))  dut_mix (.x(x), .k(k), .l(l_mix));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] e_xor, e_mix;
    for (int it = 0; it < 2000; it++) begin
      x = N'($urandom);
      k = N'($urandom);
      if (it == 0) begin x = '0; k = '0; end
      if (it == 1) begin x = '1; k = '0; end
      #1;
      for (int i = 0; i < N; i++) begin
        e_xor[i] = (x[i] != k[i]);
        e_mix[i] = MASK[i] ? (x[i] == k[i]) : (x[i] != k[i]);
      end
      checks += 2;
      if (l_xor !== e_xor) begin failures++; $display("XOR mismatch x=%h k=%h l=%h", x, k, l_xor); end
      if (l_mix !== e_mix) begin failures++; $display("XNOR mismatch x=%h k=%h l=%h", x, k, l_mix); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
