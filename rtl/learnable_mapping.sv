// learnable_mapping: the trained interconnect between the thermometer
// encoders and the LUT layer.
//
// Training decides, for every input of every LUT, which thermometer bit it
// reads. In hardware this is fixed wiring: output bit o is input bit MAP[o].
// On an FPGA it costs routing only. An input bit may feed any number of
// outputs and need not feed any.
//
// Interface: bits_i is the concatenation of all encoder outputs (feature f,
// threshold t at bit f*NUM_THRESH + t in the accelerator); bits_o[l*K + j] is
// input j of LUT l. MAP[o] must be below IN_BITS; this is checked at
// elaboration.
// Timing: combinational, wires only.
//
// Follows the paper: a mapping taken unchanged from the trained model. Own
// choice: the flat bit numbering and the stand-in default mapping.
module learnable_mapping #(
  parameter int unsigned IN_BITS  = dwn_pkg::NUM_FEATURES * dwn_pkg::NUM_THRESH,
  parameter int unsigned OUT_BITS = dwn_pkg::NUM_LUTS * dwn_pkg::LUT_INPUTS,
  parameter int unsigned K        = dwn_pkg::LUT_INPUTS,
  parameter int unsigned IDX_W    = $clog2(IN_BITS),
  parameter logic [OUT_BITS-1:0][IDX_W-1:0] MAP = default_map()
) (
  input  logic [IN_BITS-1:0]  bits_i,
  output logic [OUT_BITS-1:0] bits_o
);

  function automatic logic [OUT_BITS-1:0][IDX_W-1:0] default_map();
    logic [OUT_BITS-1:0][IDX_W-1:0] m;
    for (int unsigned o = 0; o < OUT_BITS; o++)
      m[o] = IDX_W'(dwn_pkg::default_map(o / K, o % K, IN_BITS));
    return m;
  endfunction

  for (genvar o = 0; o < OUT_BITS; o++) begin : g_wire
    if (32'(MAP[o]) >= IN_BITS) begin : g_bad
      $error("learnable_mapping: MAP[%0d] = %0d is out of range", o, MAP[o]);
    end
    assign bits_o[o] = bits_i[MAP[o]];
  end

endmodule
