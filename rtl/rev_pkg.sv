// rev_pkg: types and constants shared by the reversible-logic gate library and
// the adder/subtractor circuits built from it.
//
// The MUX gate is described in two ways: its defining equations give the middle
// output as Q = A ^ B ^ C, while every circuit schematic needs Q = A'B ^ AC (the
// classic, parity-preserving MUX gate). The enum below selects the form; all
// circuits here use MG_Q_SWAP.
//
// The quantum-cost and logic-count constants are the figures of merit quoted for
// each gate; they do not change the logic and are used by the testbenches to
// check the cost totals of each circuit.
package rev_pkg;

  typedef enum logic {
    MG_Q_XOR3 = 1'b0,  // Q = A ^ B ^ C
    MG_Q_SWAP = 1'b1   // Q = A'B ^ AC (parity preserving)
  } mg_q_form_e;

  // Quantum cost of each primitive gate.
  localparam int unsigned QC_FG  = 1;  // Feynman
  localparam int unsigned QC_F2G = 2;  // Double Feynman
  localparam int unsigned QC_MG  = 4;  // MUX gate

  // Quantum cost of each circuit, as gate counts times gate costs. The TR gate's
  // cost is not given a number, so the full adder/subtractor total is kept as
  // counts (2 MG + 5 FG + 1 TR).
  localparam int unsigned QC_HALF_ADDSUB = 2*QC_MG + 2*QC_FG;    // 2m + 2F = 10
  localparam int unsigned QC_PP_HALF_SUB = 1*QC_MG + 1*QC_F2G;   // 1m + 1D = 6
  localparam int unsigned QC_PP_FULL_SUB = 1*QC_MG + 3*QC_F2G;   // 1m + 3D = 10

  // Garbage outputs and constant inputs of each circuit as built here.
  localparam int unsigned G_HALF_ADDSUB = 3, K_HALF_ADDSUB = 2;
  localparam int unsigned G_FULL_ADDSUB = 5, K_FULL_ADDSUB = 3;
  localparam int unsigned G_PP_HALF_SUB = 2, K_PP_HALF_SUB = 2;
  localparam int unsigned G_PP_FULL_SUB = 5, K_PP_FULL_SUB = 4;

endpackage
