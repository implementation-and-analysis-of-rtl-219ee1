// tb_classification: self-checking test of popcount + argmax per class.
//
// Sized like the sm-50 model: 50 LUT outputs, 5 classes of 10. Random LUT
// output vectors of varying density, plus all-zero and all-one vectors, are
// applied; the per-class counts, the winning class (lowest on a tie) and its
// count are recomputed here and compared.
module tb_classification;
  int checks = 0, failures = 0;

  localparam int unsigned L = 50, C = 5, G = 10, CW = 4;

  logic [L-1:0]          lo;
  logic [2:0]            cls;
  logic [CW-1:0]         sc;
  logic [C-1:0][CW-1:0]  scs;

  classification #(.NUM_LUTS(L), .NUM_CLASSES(C)) dut (
    .lut_out_i(lo), .class_o(cls), .score_o(sc), .scores_o(scs));

  initial begin : watchdog
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    int cnt [C];
    int bm, bi;
    #1;
    bm = -1; bi = 0;
    for (int c = 0; c < C; c++) begin
      cnt[c] = 0;
      for (int i = 0; i < G; i++) cnt[c] += int'(lo[c*G + i]);
      checks++;
      if (int'(scs[c]) != cnt[c]) begin
        failures++;
        if (failures < 10) $display("class %0d expected %0d got %0d", c, cnt[c], scs[c]);
      end
      if (cnt[c] > bm) begin bm = cnt[c]; bi = c; end
    end
    checks++;
    if (int'(cls) != bi || int'(sc) != bm) begin
      failures++;
      if (failures < 10) $display("expected class %0d (%0d) got %0d (%0d)", bi, bm, cls, sc);
    end
  endtask

  initial begin
    lo = '0; check();
    lo = '1; check();
    for (int n = 0; n < 1000; n++) begin
      for (int i = 0; i < L; i++) lo[i] = ($urandom % 10) < (n % 11);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
