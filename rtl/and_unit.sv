// and_unit: behavioural model of one AND operation unit (1T1R cell with
// HRS compensation).
//
// The real cell is analog: a PMOS access transistor MP1 driven by the inverted
// input x_j, the RRAM, a 4 uA constant-current branch (MN1, MN2) and an output
// branch (MP2, MP3) that is pushed into sub-threshold when the RRAM is in its
// high-resistance state. Its logical effect is an AND: the cell sources one
// unit current (about 4 uA) when the input is 1 and the RRAM holds the
// low-resistance state (weight a_ij = 1), and about zero otherwise. This model
// keeps that ideal behaviour; the residual leakage of a cell in HRS and the
// spread of the LRS current are not modelled.
//
// Interface: x (word-line input), a (stored weight), z (output current in
// units of the 4 uA cell current: 1 or 0). Purely combinational.
module and_unit (
  input  logic x,
  input  logic a,
  output logic z
);

  always_comb z = x & a;

endmodule
