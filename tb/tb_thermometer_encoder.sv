// tb_thermometer_encoder: self-checking test of the thermometer encoder.
//
// Instance A has the full size (9-bit input, 200 thresholds) with the default
// thresholds of feature 3; every one of the 512 input values is applied and
// each of the 200 output bits is compared with the threshold comparison
// computed here from the threshold formula, and the code is checked to be a
// thermometer code (no 0 below a 1). Instance B is small (6-bit input,
// 8 explicit, deliberately unsorted thresholds, some negative) and is checked
// exhaustively the same way. A watchdog ends the run if it stalls.
module tb_thermometer_encoder;
  int checks = 0, failures = 0;

  localparam int unsigned WA = 9, TA = 200, FA = 3;
  localparam int unsigned WB = 6, TB = 8;
  localparam logic [TB-1:0][WB-1:0] THB = {6'sd31, -6'sd32, 6'sd0, -6'sd1, 6'sd5, -6'sd20, 6'sd12, 6'sd1};

  logic [WA-1:0] va;  logic [TA-1:0] ta;
  logic [WB-1:0] vb;  logic [TB-1:0] tbv;

  thermometer_encoder #(.IN_WIDTH(WA), .NUM_THRESH(TA), .FEATURE(FA)) u_a (.value_i(va), .therm_o(ta));
  thermometer_encoder #(.IN_WIDTH(WB), .NUM_THRESH(TB), .THRESH(THB)) u_b (.value_i(vb), .therm_o(tbv));

  initial begin : watchdog
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int x, th;
    bit exp_bit, seen_zero, mono_ok;
    for (int v = -(1 << (WA-1)); v < (1 << (WA-1)); v++) begin
      va = WA'(v);
      #1;
      mono_ok = 1; seen_zero = 0;
      for (int t = 0; t < TA; t++) begin
        th = dwn_pkg::default_threshold(FA, t, TA, WA);
        exp_bit = (v >= th);
        checks++;
        if (ta[t] !== exp_bit) begin
          failures++;
          if (failures < 10) $display("A: v=%0d t=%0d th=%0d got %b", v, t, th, ta[t]);
        end
        if (!ta[t]) seen_zero = 1;
        else if (seen_zero) mono_ok = 0;
      end
      checks++;
      if (!mono_ok) begin failures++; $display("A: v=%0d not a thermometer code", v); end
    end
    for (int v = -(1 << (WB-1)); v < (1 << (WB-1)); v++) begin
      vb = WB'(v);
      #1;
      for (int t = 0; t < TB; t++) begin
        x = int'($signed(THB[t]));
        checks++;
        if (tbv[t] !== (v >= x)) begin
          failures++;
          if (failures < 20) $display("B: v=%0d t=%0d th=%0d got %b", v, t, x, tbv[t]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
