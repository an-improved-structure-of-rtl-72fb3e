// tb_double_feynman_gate: exhaustive self-check of the Double Feynman gate.
// For all eight inputs it checks P = A, Q = A ^ B, R = A ^ C, that the map is a
// bijection, and that it preserves parity (P^Q^R == A^B^C).
module tb_double_feynman_gate;
  logic a, b, c, p, q, r;
  int checks = 0, failures = 0;
  bit seen [8];

  double_feynman_gate dut (.*);

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (seen[i]) seen[i] = 1'b0;
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = 3'(v);
      #1;
      checks++;
      if (p !== a || q !== (a ^ b) || r !== (a ^ c)) begin
        failures++;
        $display("FAIL abc=%b%b%b -> pqr=%b%b%b", a, b, c, p, q, r);
      end
      checks++;
      if (seen[{p, q, r}]) begin failures++; $display("FAIL not reversible at %0d", v); end
      seen[{p, q, r}] = 1'b1;
      checks++;
      if ((p ^ q ^ r) !== (a ^ b ^ c)) begin failures++; $display("FAIL parity at %0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
