// tb_pp_half_sub: exhaustive self-check of the parity-preserving half
// subtractor.
// 1. With the constant lines at 0: diff = A ^ B, borrow = 1 exactly when A < B,
//    and the garbage lines carry the values the schematic labels (AB and B).
// 2. All 16 values of the four input lines: outputs all differ (reversible) and
//    the XOR of the outputs equals the XOR of the inputs (parity preserving).
// 3. A single flipped output bit is always caught by the parity comparison.
module tb_pp_half_sub;
  logic       a, b;
  logic [1:0] zero;
  logic       diff, borrow;
  logic [1:0] g;
  int checks = 0, failures = 0;
  bit seen [16];

  pp_half_sub dut (.*);

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] outs;
    foreach (seen[i]) seen[i] = 1'b0;
    zero = '0;
    for (int v = 0; v < 4; v++) begin
      {a, b} = 2'(v);
      #1;
      checks++;
      if (diff !== (a ^ b) || int'(borrow) != int'(int'(a) < int'(b))) begin
        failures++; $display("FAIL a=%b b=%b -> diff=%b borrow=%b", a, b, diff, borrow);
      end
      checks++;
      if (g[0] !== (a & b) || g[1] !== b) begin
        failures++; $display("FAIL garbage a=%b b=%b -> g=%b", a, b, g);
      end
    end
    for (int v = 0; v < 16; v++) begin
      {a, b, zero} = 4'(v);
      #1;
      outs = {diff, borrow, g};
      checks++;
      if (seen[outs]) begin failures++; $display("FAIL not reversible at line value %0d", v); end
      seen[outs] = 1'b1;
      checks++;
      if ((^outs) !== (a ^ b ^ (^zero))) begin failures++; $display("FAIL parity at line value %0d", v); end
      for (int k = 0; k < 4; k++) begin
        checks++;
        if ((^(outs ^ (4'b1 << k))) === (a ^ b ^ (^zero))) begin
          failures++; $display("FAIL single-bit fault not detected");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
