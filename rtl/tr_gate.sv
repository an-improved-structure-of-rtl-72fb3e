// tr_gate: 3x3 reversible TR gate.
//
//   P = A
//   Q = A ^ B
//   R = AB' ^ C
//
// With C = 0 the gate is a reversible half subtractor (Q = A ^ B, R = AB').
// Reversible: A is passed through, B = Q ^ A, and then C = R ^ AB'.
// The adder/subtractor that uses it only names the gate and counts its logic as
// 2 XOR, 1 AND and 1 NOT; the equations above are the gate's usual definition
// in the reversible-logic literature and agree with that count.
// Purely combinational, no clock.
module tr_gate (
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
    r = (a & ~b) ^ c;
  end
endmodule
