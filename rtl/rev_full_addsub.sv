// rev_full_addsub: reversible full adder/subtractor built from five Feynman
// gates, two MUX gates and one TR gate (quantum cost 2m + 5F + 1TR).
//
// Function (ctrl = 1 adds, ctrl = 0 subtracts A - B - cin):
//   sd = A ^ B ^ cin
//   cb = AB ^ cin(A^B)              (ctrl = 1, carry out)
//   cb = A'B ^ cin(A^B)'            (ctrl = 0, borrow out)
//
// Idea: both outputs split into a "generate" term that depends on A and B only
// (AB for the carry, A'B for the borrow) and a "propagate" term that involves
// cin (cin(A^B) or cin(A^B)'); the two never overlap, so they can be XORed.
// The generate term is made exactly as in the half adder/subtractor: MUX1,
// steered by A, yields AB and A'B, and MUX2, steered by ctrl, passes one on.
// FG5 forms A^B^ctrl, and the TR gate adds the propagate term:
// R = cin & ~(A^B^ctrl) ^ generate, which is cin(A^B) when ctrl = 1 and
// cin(A^B)' when ctrl = 0.
//
//   FG2  (B, zero0)          -> B, B                  copies of B
//   FG3  (cin, zero1)        -> cin, cin              copies of cin
//   FG1  (A, B)              -> A, p = A^B
//   FG4  (p, cin)            -> p, p^cin = sd
//   MUX1 (A, zero2, B)       -> A = g1, AB, A'B
//   MUX2 (ctrl, A'B, AB)     -> ctrl, gen = ctrl ? AB : A'B, other = g2
//   FG5  (p, ctrl)           -> p = g3, p^ctrl
//   TR   (cin, p^ctrl, gen)  -> cin = g4, cin^p^ctrl = g5, cb
//
// Seven lines: A, B, cin, ctrl and three constant inputs zero[2:0] (tie to 0).
// The whole 7-bit map is a bijection. g[4:0] are the garbage outputs g1..g5.
//
// The gate list, the three constant inputs, the five garbage outputs and every
// connection that can be read from the published schematic (FG1 fed by A and
// FG2, FG4 fed by FG1 and giving the sum, MUX1 fed by FG1, FG2 and a 0 with one
// garbage output, ctrl entering MUX2 beside two MUX1 outputs, FG5 after FG4, the
// TR gate fed by FG5, MUX2 and FG3 and giving C/B) are followed. Which pin of a
// gate each line enters is not legible; the assignment above is the one that
// makes the circuit work. MUX gates use the controlled-swap form
// Q = A ? C : B, like the half adder/subtractor; ctrl = 1 for add is forced by
// this netlist. Purely combinational, no clock.
module rev_full_addsub
  import rev_pkg::*;
(
  input  logic       a,
  input  logic       b,
  input  logic       cin,
  input  logic       ctrl,
  input  logic [2:0] zero,
  output logic       sd,
  output logic       cb,
  output logic [4:0] g
);
  logic b1, b2;            // copies of B
  logic c1, c2;            // copies of cin
  logic a1;                // A after FG1
  logic p_ab;              // p = A ^ B from FG1
  logic p4;                // p passed through FG4
  logic gen_add;           // AB   (carry generate)
  logic gen_sub;           // A'B  (borrow generate)
  logic k2;                // ctrl passed through MUX2
  logic gen_sel;           // generate term picked by ctrl
  logic p_xor_ctrl;        // A ^ B ^ ctrl

  feynman_gate u_fg2 (.a(b),   .b(zero[0]), .p(b1), .q(b2));
  feynman_gate u_fg3 (.a(cin), .b(zero[1]), .p(c1), .q(c2));
  feynman_gate u_fg1 (.a(a),   .b(b1),      .p(a1), .q(p_ab));
  feynman_gate u_fg4 (.a(p_ab), .b(c1),     .p(p4), .q(sd));

  mux_gate #(.Q_FORM(MG_Q_SWAP)) u_mux1 (
    .a(a1), .b(zero[2]), .c(b2), .p(g[0]), .q(gen_add), .r(gen_sub));
  mux_gate #(.Q_FORM(MG_Q_SWAP)) u_mux2 (
    .a(ctrl), .b(gen_sub), .c(gen_add), .p(k2), .q(gen_sel), .r(g[1]));

  feynman_gate u_fg5 (.a(p4), .b(k2), .p(g[2]), .q(p_xor_ctrl));

  tr_gate u_tr (.a(c2), .b(p_xor_ctrl), .c(gen_sel), .p(g[3]), .q(g[4]), .r(cb));
endmodule
