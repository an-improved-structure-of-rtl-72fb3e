// pp_full_sub: parity-preserving reversible full subtractor, three Double
// Feynman gates and one MUX gate (quantum cost 3*2 + 4 = 10).
//
//   diff   = A ^ B ^ C
//   borrow = A'B ^ A'C ^ BC          (borrow of A - B - C)
//
// Seven lines: B, A, C and four constant inputs zero[3:0] (tie to 0); five
// garbage outputs. All gates preserve parity, so the XOR of all outputs equals
// the XOR of all inputs.
//
//   F2G1 (B, A, zero0)         -> B, A^B, B = g[0]
//   F2G2 (C, zero1, zero2)     -> C, C, C = g[1]
//   MUX  (A^B, C, B)           -> A^B, borrow, (A^B)'B ^ (A^B)C = g[2]
//   F2G3 (A^B, C, zero3)       -> A^B = g[3], diff, A^B = g[4]
//
// Borrow leaves the MUX gate's middle output, which with select A^B carries
// B when A^B = 1 (A < B exactly then) and C when A = B.
// Netlist and labels as in the published schematic, which draws four constant
// 0 inputs and leaves five outputs unused; the accompanying text speaks of one
// constant input and four garbage outputs, which this gate list cannot meet.
// The MUX gate is the parity-preserving form (Q = A'B ^ AC), as the schematic's
// label of its middle output shows. Combinational, no clock.
module pp_full_sub
  import rev_pkg::*;
(
  input  logic       a,
  input  logic       b,
  input  logic       c,
  input  logic [3:0] zero,
  output logic       diff,
  output logic       borrow,
  output logic [4:0] g
);
  logic f1_b, f1_axb;
  logic f2_c0, f2_c1;
  logic m_axb;

  double_feynman_gate u_f2g1 (.a(b), .b(a),       .c(zero[0]), .p(f1_b),  .q(f1_axb), .r(g[0]));
  double_feynman_gate u_f2g2 (.a(c), .b(zero[1]), .c(zero[2]), .p(f2_c0), .q(f2_c1),  .r(g[1]));

  mux_gate #(.Q_FORM(MG_Q_SWAP)) u_mux (
    .a(f1_axb), .b(f2_c0), .c(f1_b), .p(m_axb), .q(borrow), .r(g[2]));

  double_feynman_gate u_f2g3 (.a(m_axb), .b(f2_c1), .c(zero[3]), .p(g[3]), .q(diff), .r(g[4]));
endmodule
