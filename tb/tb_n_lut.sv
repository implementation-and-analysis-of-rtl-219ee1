// tb_n_lut: exhaustive self-checking test of a single trained LUT.
//
// A 6-input LUT with an explicit truth table and a 4-input LUT with another
// are driven with every address; the output must be the truth-table bit at
// that address (input j = address bit j). A third, default-parameter
// instance is checked against the stand-in truth table formula of LUT 7.
module tb_n_lut;
  int checks = 0, failures = 0;

  localparam logic [63:0] INIT6 = 64'hF0E1_D2C3_B4A5_9687;
  localparam logic [15:0] INIT4 = 16'b1000_0110_0011_1101;

  logic [5:0] a6, ad; logic y6, yd;
  logic [3:0] a4; logic y4;

  n_lut #(.K(6), .INIT(INIT6)) u_6 (.addr_i(a6), .y_o(y6));
  n_lut #(.K(4), .INIT(INIT4)) u_4 (.addr_i(a4), .y_o(y4));
  n_lut #(.LUT_ID(7))          u_d (.addr_i(ad), .y_o(yd));

  initial begin : watchdog
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] initd;
    initd = dwn_pkg::default_lut_init(7);
    for (int a = 0; a < 64; a++) begin
      a6 = 6'(a); ad = 6'(a); a4 = 4'(a);
      #1;
      checks++;
      if (y6 !== ((INIT6 >> a) & 64'd1) != 0) begin failures++; $display("K6 addr %0d got %b", a, y6); end
      checks++;
      if (yd !== initd[a]) begin failures++; $display("default addr %0d got %b", a, yd); end
      if (a < 16) begin
        checks++;
        if (y4 !== INIT4[a]) begin failures++; $display("K4 addr %0d got %b", a, y4); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
