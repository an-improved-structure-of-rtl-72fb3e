// tb_mux_gate: exhaustive self-check of both forms of the MUX gate.
// For every input it checks P = A, R = A ? B : C and Q (A^B^C for the XOR3
// form, A ? C : B for the swap form), that each form is a bijection, that the
// swap form preserves parity and that the XOR3 form does not always do so.
module tb_mux_gate;
  import rev_pkg::*;
  logic a, b, c;
  logic p0, q0, r0;   // XOR3 form,    Q = A ^ B ^ C
  logic p1, q1, r1;   // swap form (default), Q = A'B ^ AC
  int checks = 0, failures = 0;
  int xor3_parity_breaks = 0;
  bit seen0 [8], seen1 [8];

  mux_gate #(.Q_FORM(MG_Q_XOR3)) dut_xor3 (.a, .b, .c, .p(p0), .q(q0), .r(r0));
  mux_gate #(.Q_FORM(MG_Q_SWAP)) dut_swap (.a, .b, .c, .p(p1), .q(q1), .r(r1));

  task automatic expect_bit(input logic got, input logic want, input string what);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: abc=%b%b%b got %b want %b", what, a, b, c, got, want);
    end
  endtask

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (seen0[i]) begin seen0[i] = 1'b0; seen1[i] = 1'b0; end
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = 3'(v);
      #1;
      expect_bit(p0, a, "xor3 P");
      expect_bit(r0, a ? b : c, "xor3 R");
      expect_bit(q0, a ^ b ^ c, "xor3 Q");
      expect_bit(p1, a, "swap P");
      expect_bit(r1, a ? b : c, "swap R");
      expect_bit(q1, a ? c : b, "swap Q");
      expect_bit(p1 ^ q1 ^ r1, a ^ b ^ c, "swap parity");
      if ((p0 ^ q0 ^ r0) != (a ^ b ^ c)) xor3_parity_breaks++;
      checks++;
      if (seen0[{p0, q0, r0}] || seen1[{p1, q1, r1}]) begin
        failures++; $display("FAIL not reversible at %0d", v);
      end
      seen0[{p0, q0, r0}] = 1'b1;
      seen1[{p1, q1, r1}] = 1'b1;
    end
    checks++;
    if (xor3_parity_breaks == 0) begin
      failures++; $display("FAIL XOR3 form unexpectedly parity preserving");
    end
    $display("XOR3 form breaks parity on %0d of 8 inputs", xor3_parity_breaks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
