// rev_half_addsub: reversible half adder/subtractor built from two Feynman
// gates and two MUX gates (quantum cost 2*4 + 2*1 = 10).
//
// Function (ctrl = 1 adds, ctrl = 0 subtracts A - B):
//   sd = A ^ B                      sum or difference
//   cb = A & B        (ctrl = 1)    carry
//   cb = ~A & B       (ctrl = 0)    borrow
//
// Idea: the first MUX gate, steered by A, computes the carry AB and the borrow
// A'B at the same time on its two data outputs; the second MUX gate, steered by
// ctrl, passes one of them to its middle output.
//
//   FG_B (B, zero0)         -> B, B                  copy mode: fan-out of B
//   FG_A (A, B)             -> A, A^B = sd
//   MUX1 (A, zero1, B)      -> A = G1, AB, A'B
//   MUX2 (ctrl, A'B, AB)    -> ctrl = G2, cb, the other term = G3
//
// Five lines: A, B, ctrl and two constant inputs zero[1:0] (tie to 0). Every gate
// is a bijection on its lines, so the whole 5-bit map {a,b,ctrl,zero} ->
// {sd,cb,g} is one too; the constant lines are ports so that this can be checked.
// g[2:0] are the garbage outputs G1..G3.
//
// The gate list, the connections and the output positions (G1 on the first MUX
// gate, C/B on the second gate's middle output) follow the published schematic.
// That wiring only works with the classic MUX gate, Q = A ? C : B, which is the
// form used here. Which ctrl value means "add" is not stated; ctrl = 1 for add
// is this design's choice (the full adder/subtractor needs that polarity, and
// both circuits share it). Purely combinational, no clock.
module rev_half_addsub
  import rev_pkg::*;
(
  input  logic       a,
  input  logic       b,
  input  logic       ctrl,
  input  logic [1:0] zero,
  output logic       sd,
  output logic       cb,
  output logic [2:0] g
);
  logic b1, b2;          // two copies of B
  logic a1;              // A passed through FG_A
  logic carry, borrow;   // AB and A'B from MUX1

  feynman_gate u_fg_b (.a(b), .b(zero[0]), .p(b1), .q(b2));
  feynman_gate u_fg_a (.a(a), .b(b1),      .p(a1), .q(sd));

  mux_gate #(.Q_FORM(MG_Q_SWAP)) u_mux1 (
    .a(a1), .b(zero[1]), .c(b2), .p(g[0]), .q(carry), .r(borrow));
  mux_gate #(.Q_FORM(MG_Q_SWAP)) u_mux2 (
    .a(ctrl), .b(borrow), .c(carry), .p(g[1]), .q(cb), .r(g[2]));
endmodule
