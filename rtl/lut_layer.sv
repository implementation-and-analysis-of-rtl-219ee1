// lut_layer: the single LUT layer of the DWN, NUM_LUTS trained K-input LUTs
// side by side.
//
// LUT l reads the K bits lut_in_i[l*K +: K] (delivered by learnable_mapping)
// and drives lut_out_o[l]. Its truth table is INIT[l].
//
// Interface: lut_in_i (NUM_LUTS*K bits), lut_out_o (NUM_LUTS bits).
// Timing: combinational.
//
// Follows the paper: one layer of m n-input LUTs, m = 2400 and n = 6 for the
// large model. Own choice: the stand-in truth tables of the default.
module lut_layer #(
  parameter int unsigned NUM_LUTS = dwn_pkg::NUM_LUTS,
  parameter int unsigned K        = dwn_pkg::LUT_INPUTS,
  parameter logic [NUM_LUTS-1:0][2**K-1:0] INIT = default_init()
) (
  input  logic [NUM_LUTS*K-1:0] lut_in_i,
  output logic [NUM_LUTS-1:0]   lut_out_o
);

  function automatic logic [NUM_LUTS-1:0][2**K-1:0] default_init();
    logic [NUM_LUTS-1:0][2**K-1:0] t;
    for (int unsigned l = 0; l < NUM_LUTS; l++)
      t[l] = (2**K)'(dwn_pkg::default_lut_init(l));
    return t;
  endfunction

  for (genvar l = 0; l < NUM_LUTS; l++) begin : g_lut
    n_lut #(
      .K    (K),
      .LUT_ID(l),
      .INIT (INIT[l])
    ) u_lut (
      .addr_i(lut_in_i[l*K +: K]),
      .y_o   (lut_out_o[l])
    );
  end

endmodule
