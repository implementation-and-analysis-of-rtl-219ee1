// index_comparator: one node of the argmax tree.
//
// A ">=" comparator decides between two (value, index) pairs and two
// multiplexers forward the winning value and its index. Input A wins when its
// value is greater than or equal to that of B; the argmax tree always places
// the lower class index on input A, so equal popcounts resolve to the lower
// class index.
//
// Interface: in_value_a/in_index_a, in_value_b/in_index_b in;
// out_max_value/out_max_index out.
// Timing: combinational.
//
// Follows the paper: the comparator-plus-two-multiplexers node with these
// port names, and the lower-index-wins tie rule. Own choice: which comparator
// operand is A (the figure shows the ">=" symbol but the text fixes the tie
// rule, which this satisfies).
module index_comparator #(
  parameter int unsigned VAL_W = $clog2(dwn_pkg::NUM_LUTS / dwn_pkg::NUM_CLASSES + 1),
  parameter int unsigned IDX_W = $clog2(dwn_pkg::NUM_CLASSES)
) (
  input  logic [VAL_W-1:0] in_value_a,
  input  logic [VAL_W-1:0] in_value_b,
  input  logic [IDX_W-1:0] in_index_a,
  input  logic [IDX_W-1:0] in_index_b,
  output logic [VAL_W-1:0] out_max_value,
  output logic [IDX_W-1:0] out_max_index
);

  logic a_wins;

  assign a_wins        = in_value_a >= in_value_b;
  assign out_max_value = a_wins ? in_value_a : in_value_b;
  assign out_max_index = a_wins ? in_index_a : in_index_b;

endmodule
