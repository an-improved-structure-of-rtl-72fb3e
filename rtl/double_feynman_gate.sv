// double_feynman_gate: 3x3 reversible Double Feynman gate (F2G).
//
//   P = A
//   Q = A ^ B
//   R = A ^ C
//
// A controls two XORs at once. The gate is reversible and parity preserving
// (P ^ Q ^ R == A ^ B ^ C), which is why it is the building block of the
// parity-preserving subtractors. With B = C = 0 it makes three copies of A.
// Quantum cost 2. Purely combinational, no clock.
// Equations as defined for the gate; nothing here is a design choice.
module double_feynman_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  always_comb begin
    p = a;
    q = a ^ b;
    r = a ^ c;
  end
endmodule
