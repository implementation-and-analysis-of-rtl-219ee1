// tb_dwn_top: end-to-end test of the DWN accelerator in three of its model
// sizes, run side by side: sm-10 with 6-bit inputs, sm-50 with 8-bit inputs
// and md-360 with 9-bit inputs (16 features, 200 thresholds per feature, 6-input
// LUTs and 5 classes in each). Each is driven and checked by dwn_top_harness;
// the full-size lg-2400 model is tested by tb_dwn_top_full.
module tb_dwn_top;
  logic clk = 0;
  logic d10, d50, d360;
  int   c10, c50, c360, f10, f50, f360;

  always #5 clk = ~clk;

  dwn_top_harness #(.IN_WIDTH(6), .NUM_LUTS(10),  .NUM_VECTORS(400), .NAME("sm-10"))
    u_sm10 (.clk_i(clk), .done_o(d10), .checks_o(c10), .failures_o(f10));
  dwn_top_harness #(.IN_WIDTH(8), .NUM_LUTS(50),  .NUM_VECTORS(400), .NAME("sm-50"))
    u_sm50 (.clk_i(clk), .done_o(d50), .checks_o(c50), .failures_o(f50));
  dwn_top_harness #(.IN_WIDTH(9), .NUM_LUTS(360), .NUM_VECTORS(300), .NAME("md-360"))
    u_md360 (.clk_i(clk), .done_o(d360), .checks_o(c360), .failures_o(f360));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c10 + c50 + c360, f10 + f50 + f360 + 1);
    $finish;
  end

  initial begin
    wait (d10 && d50 && d360);
    $display("TB_RESULT checks=%0d failures=%0d", c10 + c50 + c360, f10 + f50 + f360);
    $finish;
  end
endmodule
