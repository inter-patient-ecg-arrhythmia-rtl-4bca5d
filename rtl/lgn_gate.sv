// lgn_gate: one logic-gate neuron of a logic gate network (LGN).
//
// The gate computes one of the 16 two-input Boolean functions, selected by a
// 4-bit operation code `op` that is the index i of the gate in the table of
// the 16 functions (0 = False, 1 = AND, 6 = XOR, 7 = OR, 14 = NAND,
// 15 = True, ...). The code's bits are the gate's truth table read in the
// order x0x1 = 00, 01, 10, 11 from the most significant bit down, exactly as
// the table lists it, so the output is simply op[~{x0,x1}].
// Purely combinational. The operation code is learned in training; here it
// is an input so that a trained network can be loaded.
module lgn_gate (
  input  logic [3:0] op,
  input  logic       x0,
  input  logic       x1,
  output logic       y
);
  always_comb y = op[~{x0, x1}];
endmodule
