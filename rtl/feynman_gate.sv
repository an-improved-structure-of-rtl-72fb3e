// feynman_gate: 2x2 reversible Feynman (controlled-NOT) gate.
//
//   P = A
//   Q = A ^ B
//
// The map (A,B) -> (P,Q) is a bijection, so the inputs can always be recovered
// from the outputs. With B held at 0 the gate copies A onto two lines ("copy
// mode"); this is the only legal way to fan a signal out in a reversible circuit.
// Quantum cost 1. Purely combinational, no clock.
// Equations as defined for the gate; nothing here is a design choice.
module feynman_gate (
  input  logic a,
  input  logic b,
  output logic p,
  output logic q
);
  always_comb begin
    p = a;
    q = a ^ b;
  end
endmodule
