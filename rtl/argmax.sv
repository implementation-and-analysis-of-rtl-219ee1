// argmax: finds the largest of N unsigned values and its index.
//
// A tree of index_comparator nodes reduces the (value, index) pairs pairwise:
// level 0 holds the N inputs with their positions as indices, each later level
// compares neighbouring pairs of the level below (2i on input A, 2i+1 on input
// B) and an unpaired last element moves up unchanged. For N = 4 this is the
// two-level tree of three comparators; for the 5 jet classes it has three
// levels: (0,1) and (2,3), then their winners, then that winner against 4.
// Because the lower-numbered side is always input A and A wins ties, equal
// values resolve to the lowest index.
//
// Interface: values_i[i] is the value of class i; max_value_o is the maximum,
// max_index_o the lowest index holding it.
// Timing: combinational, ceil(log2 N) comparator levels.
//
// Follows the paper: pairwise reduction with index comparators, lowest index
// on ties, maximum value and index as outputs.
module argmax #(
  parameter int unsigned N     = dwn_pkg::NUM_CLASSES,
  parameter int unsigned VAL_W = $clog2(dwn_pkg::NUM_LUTS / dwn_pkg::NUM_CLASSES + 1),
  parameter int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0][VAL_W-1:0] values_i,
  output logic [VAL_W-1:0]        max_value_o,
  output logic [IDX_W-1:0]        max_index_o
);

  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 0;

  function automatic int unsigned width_at(int unsigned lv);
    int unsigned w;
    w = N;
    for (int unsigned i = 0; i < lv; i++) w = (w + 1) / 2;
    return w;
  endfunction

  // Level lv of the tree lives in generate block g_level[lv]; level 0 holds
  // the inputs with their positions as indices.
  for (genvar lv = 0; lv <= LEVELS; lv++) begin : g_level
    logic [width_at(lv)-1:0][VAL_W-1:0] val;
    logic [width_at(lv)-1:0][IDX_W-1:0] idx;
    if (lv == 0) begin : g_leaf
      for (genvar i = 0; i < N; i++) begin : g_in
        assign val[i] = values_i[i];
        assign idx[i] = IDX_W'(i);
      end
    end else begin : g_reduce
      for (genvar i = 0; i < width_at(lv); i++) begin : g_node
        if (2 * i + 1 < width_at(lv - 1)) begin : g_cmp
          index_comparator #(
            .VAL_W(VAL_W),
            .IDX_W(IDX_W)
          ) u_cmp (
            .in_value_a   (g_level[lv-1].val[2*i]),
            .in_value_b   (g_level[lv-1].val[2*i+1]),
            .in_index_a   (g_level[lv-1].idx[2*i]),
            .in_index_b   (g_level[lv-1].idx[2*i+1]),
            .out_max_value(val[i]),
            .out_max_index(idx[i])
          );
        end else begin : g_pass
          assign val[i] = g_level[lv-1].val[2*i];
          assign idx[i] = g_level[lv-1].idx[2*i];
        end
      end
    end
  end

  assign max_value_o = g_level[LEVELS].val[0];
  assign max_index_o = g_level[LEVELS].idx[0];

endmodule
