// tb_feynman_gate: exhaustive self-check of the Feynman gate.
// Applies all four (A,B) inputs, compares P,Q with P = A, Q = A ^ B worked out
// here, and checks that no two inputs give the same output pair (reversibility).
module tb_feynman_gate;
  logic a, b, p, q;
  int checks = 0, failures = 0;
  bit seen [4];

  feynman_gate dut (.a(a), .b(b), .p(p), .q(q));

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (seen[i]) seen[i] = 1'b0;
    for (int v = 0; v < 4; v++) begin
      {a, b} = 2'(v);
      #1;
      checks++;
      if (p !== a || q !== (a != b)) begin
        failures++;
        $display("FAIL a=%b b=%b -> p=%b q=%b", a, b, p, q);
      end
      checks++;
      if (seen[{p, q}]) begin
        failures++;
        $display("FAIL output %b%b repeats: not reversible", p, q);
      end
      seen[{p, q}] = 1'b1;
    end
    // copy mode: B = 0 gives two copies of A
    for (int v = 0; v < 2; v++) begin
      a = v[0]; b = 1'b0; #1;
      checks++;
      if (p !== a || q !== a) begin failures++; $display("FAIL copy mode a=%b", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
