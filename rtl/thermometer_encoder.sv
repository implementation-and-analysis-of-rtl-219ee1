// thermometer_encoder: converts one signed fixed-point feature into a
// thermometer code.
//
// Every threshold has a comparator of its own: output bit t is 1 when the
// input is greater than or equal to threshold t. Because the thresholds of a
// distributive (percentile-based) encoding are not evenly spaced, no comparator
// is shared or simplified; this is the structure the accelerator uses for all
// 16 features. With sorted thresholds the output is a thermometer code (all
// ones below some position, zeros above); the module does not require sorted
// thresholds and simply evaluates each comparison.
//
// Interface: value_i is a two's-complement number in the (1, IN_WIDTH-1)
// fixed-point format (sign bit, the rest fraction, range [-1, 1)); THRESH
// holds the NUM_THRESH thresholds in the same format, threshold t in
// THRESH[t]. therm_o[t] = (value_i >= THRESH[t]).
// Timing: purely combinational.
//
// Follows the paper: one ">=" comparator per threshold, signed fixed point,
// 200 outputs per feature, 9-bit inputs for the large model. Own choice: the
// stand-in thresholds of the default (feature FEATURE of dwn_pkg's model).
module thermometer_encoder #(
  parameter int unsigned IN_WIDTH   = dwn_pkg::IN_WIDTH,
  parameter int unsigned NUM_THRESH = dwn_pkg::NUM_THRESH,
  parameter int unsigned FEATURE    = 0,
  parameter logic [NUM_THRESH-1:0][IN_WIDTH-1:0] THRESH = default_thresh()
) (
  input  logic [IN_WIDTH-1:0]   value_i,
  output logic [NUM_THRESH-1:0] therm_o
);

  function automatic logic [NUM_THRESH-1:0][IN_WIDTH-1:0] default_thresh();
    logic [NUM_THRESH-1:0][IN_WIDTH-1:0] th;
    for (int unsigned t = 0; t < NUM_THRESH; t++)
      th[t] = IN_WIDTH'(dwn_pkg::default_threshold(FEATURE, t, NUM_THRESH, IN_WIDTH));
    return th;
  endfunction

  for (genvar t = 0; t < NUM_THRESH; t++) begin : g_cmp
    assign therm_o[t] = $signed(value_i) >= $signed(THRESH[t]);
  end

endmodule
