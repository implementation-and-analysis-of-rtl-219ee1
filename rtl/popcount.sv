// popcount: counts the ones in a bit vector.
//
// The count is formed by a balanced binary tree of adders: level 0 holds the
// N input bits, every later level adds neighbouring pairs of the level below
// (an odd element is carried up unchanged), and the single element of the top
// level is the count. The tree has ceil(log2 N) adder levels.
//
// Interface: bits_i (N bits) in, count_o (CNT_W = clog2(N+1) bits) out.
// Timing: combinational.
//
// Follows the paper: one popcount per class over that class's LUT outputs.
// Own choice: the adder tree. The paper builds this unit from a compressor
// tree generator it does not describe; an adder tree computes the same sum
// and leaves the choice of compressors to synthesis.
module popcount #(
  parameter int unsigned N     = dwn_pkg::NUM_LUTS / dwn_pkg::NUM_CLASSES,
  parameter int unsigned CNT_W = $clog2(N + 1)
) (
  input  logic [N-1:0]     bits_i,
  output logic [CNT_W-1:0] count_o
);

  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 1;

  // number of partial sums on level lv
  function automatic int unsigned width_at(int unsigned lv);
    int unsigned w;
    w = N;
    for (int unsigned i = 0; i < lv; i++) w = (w + 1) / 2;
    return w;
  endfunction

  logic [CNT_W-1:0] sums [LEVELS+1][N];

  always_comb begin
    for (int unsigned lv = 0; lv <= LEVELS; lv++)
      for (int unsigned i = 0; i < N; i++)
        sums[lv][i] = '0;
    for (int unsigned i = 0; i < N; i++)
      sums[0][i] = CNT_W'(bits_i[i]);
    for (int unsigned lv = 0; lv < LEVELS; lv++) begin
      for (int unsigned i = 0; i < width_at(lv + 1); i++) begin
        if (2 * i + 1 < width_at(lv))
          sums[lv+1][i] = sums[lv][2*i] + sums[lv][2*i+1];
        else
          sums[lv+1][i] = sums[lv][2*i];
      end
    end
  end

  assign count_o = sums[LEVELS][0];

endmodule
