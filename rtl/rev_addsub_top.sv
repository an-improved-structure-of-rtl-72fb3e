// rev_addsub_top: the four proposed reversible arithmetic circuits side by side.
//
//   u_half_addsub  half adder/subtractor  (2 Feynman + 2 MUX gates)
//   u_full_addsub  full adder/subtractor  (5 Feynman + 2 MUX + 1 TR gate)
//   u_pp_half_sub  parity-preserving half subtractor (1 F2G + 1 MUX gate)
//   u_pp_full_sub  parity-preserving full subtractor (3 F2G + 1 MUX gate)
//
// Each circuit is independent: they share no signal. The top ties every
// constant-input line to 0, as a reversible circuit requires, and brings the
// data inputs, results and garbage outputs out as ports (garbage lines are
// kept visible because in a reversible implementation they are physical
// outputs). ctrl = 1 selects addition, ctrl = 0 subtraction. Purely
// combinational: results follow the inputs with no clock and no latency.
// Grouping the circuits into one top is this design's choice.
module rev_addsub_top
  import rev_pkg::*;
(
  // half adder/subtractor
  input  logic       ha_a,
  input  logic       ha_b,
  input  logic       ha_ctrl,
  output logic       ha_sd,
  output logic       ha_cb,
  output logic [2:0] ha_garbage,
  // full adder/subtractor
  input  logic       fa_a,
  input  logic       fa_b,
  input  logic       fa_cin,
  input  logic       fa_ctrl,
  output logic       fa_sd,
  output logic       fa_cb,
  output logic [4:0] fa_garbage,
  // parity-preserving half subtractor
  input  logic       hs_a,
  input  logic       hs_b,
  output logic       hs_diff,
  output logic       hs_borrow,
  output logic [1:0] hs_garbage,
  // parity-preserving full subtractor
  input  logic       fs_a,
  input  logic       fs_b,
  input  logic       fs_c,
  output logic       fs_diff,
  output logic       fs_borrow,
  output logic [4:0] fs_garbage
);
  rev_half_addsub u_half_addsub (
    .a(ha_a), .b(ha_b), .ctrl(ha_ctrl), .zero('0),
    .sd(ha_sd), .cb(ha_cb), .g(ha_garbage));

  rev_full_addsub u_full_addsub (
    .a(fa_a), .b(fa_b), .cin(fa_cin), .ctrl(fa_ctrl), .zero('0),
    .sd(fa_sd), .cb(fa_cb), .g(fa_garbage));

  pp_half_sub u_pp_half_sub (
    .a(hs_a), .b(hs_b), .zero('0),
    .diff(hs_diff), .borrow(hs_borrow), .g(hs_garbage));

  pp_full_sub u_pp_full_sub (
    .a(fs_a), .b(fs_b), .c(fs_c), .zero('0),
    .diff(fs_diff), .borrow(fs_borrow), .g(fs_garbage));
endmodule
