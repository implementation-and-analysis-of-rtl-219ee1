// classification: popcount per class followed by argmax.
//
// The NUM_LUTS outputs of the LUT layer are split into NUM_CLASSES equal,
// contiguous groups: LUTs c*G .. c*G+G-1 (G = NUM_LUTS / NUM_CLASSES) vote for
// class c. One popcount per group counts the votes and the argmax picks the
// class with the most votes, the lowest class number on a tie.
//
// Interface: lut_out_i (NUM_LUTS bits) in; class_o (winning class),
// score_o (its vote count) and scores_o (all vote counts) out.
// Timing: combinational.
//
// Follows the paper: equal groups of LUTs per class (10 per class for sm-50,
// 480 for lg-2400), popcount per class, argmax. Own choice: contiguous
// numbering of the groups.
module classification #(
  parameter int unsigned NUM_LUTS    = dwn_pkg::NUM_LUTS,
  parameter int unsigned NUM_CLASSES = dwn_pkg::NUM_CLASSES,
  parameter int unsigned GROUP       = NUM_LUTS / NUM_CLASSES,
  parameter int unsigned CNT_W       = $clog2(GROUP + 1),
  parameter int unsigned CLS_W       = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1
) (
  input  logic [NUM_LUTS-1:0]                lut_out_i,
  output logic [CLS_W-1:0]                   class_o,
  output logic [CNT_W-1:0]                   score_o,
  output logic [NUM_CLASSES-1:0][CNT_W-1:0]  scores_o
);

  if (GROUP * NUM_CLASSES != NUM_LUTS) begin : g_bad
    $error("classification: NUM_LUTS must be a multiple of NUM_CLASSES");
  end

  for (genvar c = 0; c < NUM_CLASSES; c++) begin : g_class
    popcount #(
      .N    (GROUP),
      .CNT_W(CNT_W)
    ) u_popcount (
      .bits_i (lut_out_i[c*GROUP +: GROUP]),
      .count_o(scores_o[c])
    );
  end

  argmax #(
    .N    (NUM_CLASSES),
    .VAL_W(CNT_W),
    .IDX_W(CLS_W)
  ) u_argmax (
    .values_i   (scores_o),
    .max_value_o(score_o),
    .max_index_o(class_o)
  );

endmodule
