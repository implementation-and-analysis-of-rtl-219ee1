// dwn_top: fully parallel DWN inference accelerator with thermometer encoding.
//
// One complete classification per clock cycle. The datapath, from input to
// output register:
//   1. NUM_FEATURES thermometer encoders turn the signed fixed-point features
//      into NUM_FEATURES*NUM_THRESH thermometer bits (bit f*NUM_THRESH + t is
//      feature f >= threshold t of that feature);
//   2. the learnable mapping wires LUT_INPUTS of those bits to every LUT;
//   3. the LUT layer evaluates NUM_LUTS trained LUT_INPUTS-input LUTs;
//   4. the classification logic counts, per class, the ones among that
//      class's NUM_LUTS/NUM_CLASSES LUT outputs and picks the class with the
//      largest count (lowest class number on a tie).
// Steps 1-4 are combinational between two registers: an input register that
// captures the features and an output register that holds the result.
//
// Interface: when in_valid_i is high at a rising clock edge, features_i is
// captured; class_o / score_o (the winning class and its vote count) and
// scores_o (all vote counts) are valid with out_valid_o exactly 2 cycles
// later. A new input may be given every cycle; there is no back-pressure.
// rst_ni (active low, synchronous) clears the valid pipeline only.
//
// The model itself is in the parameters THRESH (per feature, per threshold),
// MAP (thermometer bit of every LUT input) and INIT (truth table of every
// LUT); their defaults are the stand-in model of dwn_pkg. Size defaults are
// those of the large JSC model (lg-2400) with 9-bit inputs.
//
// Follows the paper: encoder / mapping / LUT layer / popcount / argmax
// structure, one comparator per threshold, single LUT layer, class groups,
// tie rule, and the model sizes. Own choices: the two register stages (chosen
// so that the latency, 2 cycles, matches about 2.1 ns at 947 MHz reported for
// this model), the valid signal, the reset and the port formats.
module dwn_top #(
  parameter int unsigned NUM_FEATURES = dwn_pkg::NUM_FEATURES,
  parameter int unsigned IN_WIDTH     = dwn_pkg::IN_WIDTH,
  parameter int unsigned NUM_THRESH   = dwn_pkg::NUM_THRESH,
  parameter int unsigned NUM_LUTS     = dwn_pkg::NUM_LUTS,
  parameter int unsigned LUT_INPUTS   = dwn_pkg::LUT_INPUTS,
  parameter int unsigned NUM_CLASSES  = dwn_pkg::NUM_CLASSES,
  // derived sizes
  parameter int unsigned ENC_BITS = NUM_FEATURES * NUM_THRESH,
  parameter int unsigned ENC_IDX_W = $clog2(ENC_BITS),
  parameter int unsigned CNT_W    = $clog2(NUM_LUTS / NUM_CLASSES + 1),
  parameter int unsigned CLS_W    = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1,
  // trained model
  parameter logic [NUM_FEATURES-1:0][NUM_THRESH-1:0][IN_WIDTH-1:0] THRESH = default_thresh(),
  parameter logic [NUM_LUTS*LUT_INPUTS-1:0][ENC_IDX_W-1:0]         MAP    = default_map(),
  parameter logic [NUM_LUTS-1:0][2**LUT_INPUTS-1:0]                INIT   = default_init()
) (
  input  logic                                   clk_i,
  input  logic                                   rst_ni,
  input  logic                                   in_valid_i,
  input  logic [NUM_FEATURES-1:0][IN_WIDTH-1:0]  features_i,
  output logic                                   out_valid_o,
  output logic [CLS_W-1:0]                       class_o,
  output logic [CNT_W-1:0]                       score_o,
  output logic [NUM_CLASSES-1:0][CNT_W-1:0]      scores_o
);

  function automatic logic [NUM_FEATURES-1:0][NUM_THRESH-1:0][IN_WIDTH-1:0] default_thresh();
    logic [NUM_FEATURES-1:0][NUM_THRESH-1:0][IN_WIDTH-1:0] th;
    for (int unsigned f = 0; f < NUM_FEATURES; f++)
      for (int unsigned t = 0; t < NUM_THRESH; t++)
        th[f][t] = IN_WIDTH'(dwn_pkg::default_threshold(f, t, NUM_THRESH, IN_WIDTH));
    return th;
  endfunction

  function automatic logic [NUM_LUTS*LUT_INPUTS-1:0][ENC_IDX_W-1:0] default_map();
    logic [NUM_LUTS*LUT_INPUTS-1:0][ENC_IDX_W-1:0] m;
    for (int unsigned o = 0; o < NUM_LUTS * LUT_INPUTS; o++)
      m[o] = ENC_IDX_W'(dwn_pkg::default_map(o / LUT_INPUTS, o % LUT_INPUTS, ENC_BITS));
    return m;
  endfunction

  function automatic logic [NUM_LUTS-1:0][2**LUT_INPUTS-1:0] default_init();
    logic [NUM_LUTS-1:0][2**LUT_INPUTS-1:0] t;
    for (int unsigned l = 0; l < NUM_LUTS; l++)
      t[l] = (2**LUT_INPUTS)'(dwn_pkg::default_lut_init(l));
    return t;
  endfunction

  // ---- input register ----------------------------------------------------
  logic                                  valid_q;
  logic [NUM_FEATURES-1:0][IN_WIDTH-1:0] features_q;

  always_ff @(posedge clk_i) begin
    if (!rst_ni) valid_q <= 1'b0;
    else         valid_q <= in_valid_i;
    if (in_valid_i) features_q <= features_i;
  end

  // ---- featurewise encoding ----------------------------------------------
  logic [ENC_BITS-1:0] therm;

  for (genvar f = 0; f < NUM_FEATURES; f++) begin : g_enc
    thermometer_encoder #(
      .IN_WIDTH  (IN_WIDTH),
      .NUM_THRESH(NUM_THRESH),
      .FEATURE   (f),
      .THRESH    (THRESH[f])
    ) u_enc (
      .value_i(features_q[f]),
      .therm_o(therm[f*NUM_THRESH +: NUM_THRESH])
    );
  end

  // ---- learnable mapping and LUT layer -------------------------------------
  logic [NUM_LUTS*LUT_INPUTS-1:0] lut_in;
  logic [NUM_LUTS-1:0]            lut_out;

  learnable_mapping #(
    .IN_BITS (ENC_BITS),
    .OUT_BITS(NUM_LUTS * LUT_INPUTS),
    .K       (LUT_INPUTS),
    .IDX_W   (ENC_IDX_W),
    .MAP     (MAP)
  ) u_map (
    .bits_i(therm),
    .bits_o(lut_in)
  );

  lut_layer #(
    .NUM_LUTS(NUM_LUTS),
    .K       (LUT_INPUTS),
    .INIT    (INIT)
  ) u_lut_layer (
    .lut_in_i (lut_in),
    .lut_out_o(lut_out)
  );

  // ---- classification ------------------------------------------------------
  logic [CLS_W-1:0]                  class_d;
  logic [CNT_W-1:0]                  score_d;
  logic [NUM_CLASSES-1:0][CNT_W-1:0] scores_d;

  classification #(
    .NUM_LUTS   (NUM_LUTS),
    .NUM_CLASSES(NUM_CLASSES),
    .CNT_W      (CNT_W),
    .CLS_W      (CLS_W)
  ) u_cls (
    .lut_out_i(lut_out),
    .class_o  (class_d),
    .score_o  (score_d),
    .scores_o (scores_d)
  );

  // ---- output register -----------------------------------------------------
  always_ff @(posedge clk_i) begin
    if (!rst_ni) out_valid_o <= 1'b0;
    else         out_valid_o <= valid_q;
    if (valid_q) begin
      class_o  <= class_d;
      score_o  <= score_d;
      scores_o <= scores_d;
    end
  end

endmodule
