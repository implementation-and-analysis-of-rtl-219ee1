// dwn_top_harness: drives one dwn_top configuration end to end and checks it
// against a reference model.
//
// The reference model is written here from the definition of a DWN, not from
// the RTL: for every vector it evaluates each thermometer threshold with the
// stand-in threshold formula, looks up each LUT input in the stand-in mapping,
// reads each LUT's truth-table bit, counts the ones per class and takes the
// first class with the largest count. Inputs are random (full range) with
// occasional extreme values, given back to back with random idle cycles, and
// a reset is applied in mid-run. Each result must arrive exactly 2 cycles
// after its input and match class, winning count and all class counts.
//
// The harness counts how often each mechanism of the design occurred and
// counts a failure for one that never did: back-to-back inputs, idle cycles,
// a feature below all of its thresholds, a feature at or above all of them, a
// tie between classes for the maximum (resolved to the lower class), and
// reset clearing the pipeline.
//
// Ports: clk_i in; done_o, checks_o, failures_o out.
module dwn_top_harness #(
  parameter int unsigned NUM_FEATURES = 16,
  parameter int unsigned IN_WIDTH     = 8,
  parameter int unsigned NUM_THRESH   = 200,
  parameter int unsigned NUM_LUTS     = 50,
  parameter int unsigned LUT_INPUTS   = 6,
  parameter int unsigned NUM_CLASSES  = 5,
  parameter int unsigned NUM_VECTORS  = 400,
  parameter string       NAME         = "dwn"
) (
  input  logic clk_i,
  output logic done_o,
  output int   checks_o,
  output int   failures_o
);
  localparam int unsigned ENC_BITS = NUM_FEATURES * NUM_THRESH;
  localparam int unsigned CNT_W    = $clog2(NUM_LUTS / NUM_CLASSES + 1);
  localparam int unsigned CLS_W    = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1;
  localparam int unsigned GROUP    = NUM_LUTS / NUM_CLASSES;

  typedef logic [NUM_FEATURES-1:0][IN_WIDTH-1:0] feat_t;
  typedef struct {
    int cls;
    int score;
    int cnt [NUM_CLASSES];
    int in_cycle;
  } expect_t;

  logic                              rst_n, in_valid, out_valid;
  feat_t                             features;
  logic [CLS_W-1:0]                  cls;
  logic [CNT_W-1:0]                  score;
  logic [NUM_CLASSES-1:0][CNT_W-1:0] scores;

  dwn_top #(
    .NUM_FEATURES(NUM_FEATURES),
    .IN_WIDTH    (IN_WIDTH),
    .NUM_THRESH  (NUM_THRESH),
    .NUM_LUTS    (NUM_LUTS),
    .LUT_INPUTS  (LUT_INPUTS),
    .NUM_CLASSES (NUM_CLASSES)
  ) u_dut (
    .clk_i      (clk_i),
    .rst_ni     (rst_n),
    .in_valid_i (in_valid),
    .features_i (features),
    .out_valid_o(out_valid),
    .class_o    (cls),
    .score_o    (score),
    .scores_o   (scores)
  );


  int      th   [NUM_FEATURES][NUM_THRESH];
  int      mp   [NUM_LUTS * LUT_INPUTS];
  logic [63:0] tt [NUM_LUTS];
  expect_t pending [$];
  int      cycle = 0;
  int      checks = 0, failures = 0;
  int      n_b2b = 0, n_idle = 0, n_below = 0, n_above = 0, n_tie = 0, n_reset = 0;
  bit      prev_valid = 0;

  always @(posedge clk_i) cycle <= cycle + 1;

  function automatic expect_t reference(feat_t x);
    expect_t e;
    logic [ENC_BITS-1:0] therm;
    int v, addr, nmax;
    bit all0, all1;
    for (int f = 0; f < NUM_FEATURES; f++) begin
      v = int'($signed(x[f]));
      all0 = 1; all1 = 1;
      for (int t = 0; t < NUM_THRESH; t++) begin
        therm[f*NUM_THRESH + t] = (v >= th[f][t]);
        if (v >= th[f][t]) all0 = 0; else all1 = 0;
      end
      if (all0) n_below++;
      if (all1) n_above++;
    end
    for (int c = 0; c < NUM_CLASSES; c++) e.cnt[c] = 0;
    for (int l = 0; l < NUM_LUTS; l++) begin
      addr = 0;
      for (int j = 0; j < LUT_INPUTS; j++) addr |= int'(therm[mp[l*LUT_INPUTS + j]]) << j;
      e.cnt[l / GROUP] += int'(tt[l][addr]);
    end
    e.cls = 0; e.score = e.cnt[0];
    for (int c = 1; c < NUM_CLASSES; c++)
      if (e.cnt[c] > e.score) begin e.score = e.cnt[c]; e.cls = c; end
    nmax = 0;
    for (int c = 0; c < NUM_CLASSES; c++) if (e.cnt[c] == e.score) nmax++;
    if (nmax > 1) n_tie++;
    return e;
  endfunction

  function automatic feat_t random_features(int n);
    feat_t x;
    for (int f = 0; f < NUM_FEATURES; f++) begin
      case ($urandom % 10)
        0:       x[f] = {1'b1, {(IN_WIDTH-1){1'b0}}};   // most negative
        1:       x[f] = {1'b0, {(IN_WIDTH-1){1'b1}}};   // most positive
        default: x[f] = IN_WIDTH'($urandom);
      endcase
    end
    return x;
  endfunction

  // output checker
  always @(posedge clk_i) begin
    expect_t e;
    if (rst_n && out_valid) begin
      checks++;
      if (pending.size() == 0) begin
        failures++;
        $display("%s: unexpected output at cycle %0d", NAME, cycle);
      end else begin
        e = pending.pop_front();
        if (cycle - e.in_cycle != 2) begin
          failures++;
          $display("%s: latency %0d cycles, expected 2", NAME, cycle - e.in_cycle);
        end
        if (int'(cls) != e.cls || int'(score) != e.score) begin
          failures++;
          if (failures < 10)
            $display("%s: class %0d (%0d) expected %0d (%0d)", NAME, cls, score, e.cls, e.score);
        end
        for (int c = 0; c < NUM_CLASSES; c++) begin
          checks++;
          if (int'(scores[c]) != e.cnt[c]) begin
            failures++;
            if (failures < 10) $display("%s: count of class %0d is %0d expected %0d", NAME, c, scores[c], e.cnt[c]);
          end
        end
      end
    end
  end

  initial begin
    expect_t e;
    int sent;
    done_o = 0; checks_o = 0; failures_o = 0;
    for (int f = 0; f < NUM_FEATURES; f++)
      for (int t = 0; t < NUM_THRESH; t++)
        th[f][t] = dwn_pkg::default_threshold(f, t, NUM_THRESH, IN_WIDTH);
    for (int o = 0; o < NUM_LUTS * LUT_INPUTS; o++)
      mp[o] = int'(dwn_pkg::default_map(o / LUT_INPUTS, o % LUT_INPUTS, ENC_BITS));
    for (int l = 0; l < NUM_LUTS; l++) tt[l] = dwn_pkg::default_lut_init(l);

    rst_n = 0; in_valid = 0; features = '0;
    repeat (3) @(posedge clk_i);
    #1 rst_n = 1;
    sent = 0;
    while (sent < NUM_VECTORS) begin
      @(negedge clk_i);
      if (sent == NUM_VECTORS / 2 && n_reset == 0) begin
        // let the results already sent drain, then reset with one input
        // in flight: it must be dropped
        in_valid = 0;
        repeat (3) @(negedge clk_i);
        in_valid = 1; features = random_features(sent);
        @(posedge clk_i); #1;
        in_valid = 0; rst_n = 0;
        @(posedge clk_i); #1;
        rst_n = 1;
        checks++;
        if (out_valid) begin failures++; $display("%s: out_valid set after reset", NAME); end
        repeat (3) begin
          @(posedge clk_i); #1;
          checks++;
          if (out_valid) begin failures++; $display("%s: dropped result appeared", NAME); end
        end
        n_reset++;
        continue;
      end
      if ($urandom % 4 == 0) begin
        in_valid = 0;
        n_idle++;
        prev_valid = 0;
      end else begin
        in_valid = 1;
        features = random_features(sent);
        e = reference(features);
        e.in_cycle = cycle;
        pending.push_back(e);
        if (prev_valid) n_b2b++;
        prev_valid = 1;
        sent++;
      end
    end
    @(negedge clk_i) in_valid = 0;
    repeat (5) @(posedge clk_i);
    checks++;
    if (pending.size() != 0) begin failures++; $display("%s: %0d results missing", NAME, pending.size()); end
    $display("%s: back-to-back %0d, idle %0d, below-all %0d, above-all %0d, ties %0d, resets %0d",
             NAME, n_b2b, n_idle, n_below, n_above, n_tie, n_reset);
    checks += 6;
    if (n_b2b   == 0) begin failures++; $display("%s: no back-to-back inputs", NAME); end
    if (n_idle  == 0) begin failures++; $display("%s: no idle cycles", NAME); end
    if (n_below == 0) begin failures++; $display("%s: no feature below all thresholds", NAME); end
    if (n_above == 0) begin failures++; $display("%s: no feature above all thresholds", NAME); end
    if (n_tie   == 0) begin failures++; $display("%s: no tie between classes", NAME); end
    if (n_reset == 0) begin failures++; $display("%s: no reset in flight", NAME); end
    checks_o = checks; failures_o = failures;
    done_o = 1;
  end

endmodule
