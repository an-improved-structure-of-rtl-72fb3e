// pp_half_sub: parity-preserving reversible half subtractor, one Double Feynman
// gate and one MUX gate (quantum cost 2 + 4 = 6).
//
//   diff   = A ^ B
//   borrow = A'B
//
// Four lines: B, A and two constant inputs zero[1:0] (tie to 0); two garbage
// outputs g = {B, AB}. Both gates preserve parity, so
// a ^ b ^ ^zero == diff ^ borrow ^ ^g for every input: a single-bit fault on
// any line shows up as a parity mismatch, without an extra parity line.
//
//   F2G (B, A, zero0)       -> B, A^B, B = g[1]
//   MUX (A^B, B, zero1)     -> A^B = diff, AB = g[0], A'B = borrow
//
// Netlist and output labels as in the published schematic. The MUX gate is the
// parity-preserving form (Q = A'B ^ AC), which the schematic's "AB" label on its
// middle output implies. Combinational, no clock.
module pp_half_sub
  import rev_pkg::*;
(
  input  logic       a,
  input  logic       b,
  input  logic [1:0] zero,
  output logic       diff,
  output logic       borrow,
  output logic [1:0] g
);
  logic f_b, f_axb;

  double_feynman_gate u_f2g (.a(b), .b(a), .c(zero[0]), .p(f_b), .q(f_axb), .r(g[1]));

  mux_gate #(.Q_FORM(MG_Q_SWAP)) u_mux (
    .a(f_axb), .b(f_b), .c(zero[1]), .p(diff), .q(g[0]), .r(borrow));
endmodule
