// tb_pp_full_sub: exhaustive self-check of the parity-preserving full
// subtractor.
// 1. With the constant lines at 0, all eight (A, B, C): diff is the low bit of
//    A - B - C, borrow = 1 exactly when A < B + C, and the garbage lines carry
//    the values the schematic labels.
// 2. All 128 values of the seven input lines: outputs all differ (reversible)
//    and output parity equals input parity.
module tb_pp_full_sub;
  logic       a, b, c;
  logic [3:0] zero;
  logic       diff, borrow;
  logic [4:0] g;
  int checks = 0, failures = 0;
  bit seen [128];

  pp_full_sub dut (.*);

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d;
    logic axb;
    logic [6:0] outs;
    foreach (seen[i]) seen[i] = 1'b0;
    zero = '0;
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = 3'(v);
      #1;
      d = int'(a) - int'(b) - int'(c);
      axb = a ^ b;
      checks++;
      if (int'(diff) != (d + 4) % 2 || int'(borrow) != int'(d < 0)) begin
        failures++; $display("FAIL a=%b b=%b c=%b -> diff=%b borrow=%b", a, b, c, diff, borrow);
      end
      checks++;
      if (g !== {axb, axb, (~axb & b) ^ (axb & c), c, b}) begin
        failures++; $display("FAIL garbage a=%b b=%b c=%b -> g=%b", a, b, c, g);
      end
    end
    for (int v = 0; v < 128; v++) begin
      {a, b, c, zero} = 7'(v);
      #1;
      outs = {diff, borrow, g};
      checks++;
      if (seen[outs]) begin failures++; $display("FAIL not reversible at line value %0d", v); end
      seen[outs] = 1'b1;
      checks++;
      if ((^outs) !== (a ^ b ^ c ^ (^zero))) begin failures++; $display("FAIL parity at line value %0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
