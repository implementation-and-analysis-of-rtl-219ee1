// n_lut: one trained K-input lookup table of the LUT layer.
//
// The K input bits form an address; the output is the bit of the truth table
// INIT at that address (input j is address bit j). With K = 6 each n_lut maps
// onto one 6-input LUT of the FPGA.
//
// Interface: addr_i (K bits) in, y_o out, y_o = INIT[addr_i].
// Timing: combinational.
//
// Follows the paper: n-input LUTs with 6 inputs for the JSC models. Own
// choice: the address bit order and the stand-in truth table of the default
// (LUT number LUT_ID of dwn_pkg's model).
module n_lut #(
  parameter int unsigned K      = dwn_pkg::LUT_INPUTS,
  parameter int unsigned LUT_ID = 0,
  parameter logic [2**K-1:0] INIT = (2**K)'(dwn_pkg::default_lut_init(LUT_ID))
) (
  input  logic [K-1:0] addr_i,
  output logic         y_o
);

  assign y_o = INIT[addr_i];

endmodule
