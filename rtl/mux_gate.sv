// mux_gate: 3x3 reversible MUX gate (MG).
//
//   P = A
//   R = A'C ^ AB        (A selects B when 1, C when 0)
//   Q = A'B ^ AC        when Q_FORM = MG_Q_SWAP (default)
//   Q = A ^ B ^ C       when Q_FORM = MG_Q_XOR3
//
// In the default form the gate routes B and C to Q and R straight when A = 0
// and crossed when A = 1: it is a controlled swap. That form is reversible and
// parity preserving (P ^ Q ^ R == A ^ B ^ C), and it is the one all four
// adder/subtractor schematics rely on (their output labels and wiring only
// work with it). The gate's defining equations as printed, however, give
// Q = A ^ B ^ C (3 XOR, 2 AND, 1 NOT in all, the count used for its logic
// cost); that form is also reversible but not parity preserving, and is kept
// as an option. Quantum cost 4. Purely combinational, no clock.
module mux_gate
  import rev_pkg::*;
#(
  parameter mg_q_form_e Q_FORM = MG_Q_SWAP
) (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  always_comb begin
    p = a;
    r = (~a & c) ^ (a & b);
    if (Q_FORM == MG_Q_SWAP) q = (~a & b) ^ (a & c);
    else                     q = a ^ b ^ c;
  end
endmodule
