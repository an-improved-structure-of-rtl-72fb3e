// tb_tr_gate: exhaustive self-check of the TR gate.
// Checks P = A, Q = A ^ B, R = AB' ^ C for all inputs, the half-subtractor use
// (C = 0 gives the difference A^B and the borrow of B - A, which is AB'),
// and that the map is a bijection.
module tb_tr_gate;
  logic a, b, c, p, q, r;
  int checks = 0, failures = 0;
  bit seen [8];

  tr_gate dut (.*);

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
      if (p !== a || q !== (a ^ b) || r !== ((a & ~b) ^ c)) begin
        failures++;
        $display("FAIL abc=%b%b%b -> pqr=%b%b%b", a, b, c, p, q, r);
      end
      checks++;
      if (seen[{p, q, r}]) begin failures++; $display("FAIL not reversible at %0d", v); end
      seen[{p, q, r}] = 1'b1;
      if (!c) begin
        // B - A as a half subtractor: borrow is set exactly when A=1, B=0
        checks++;
        if (r !== (int'(b) < int'(a))) begin failures++; $display("FAIL borrow a=%b b=%b", a, b); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
