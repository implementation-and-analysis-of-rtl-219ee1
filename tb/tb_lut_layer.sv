// tb_lut_layer: self-checking test of the LUT layer.
//
// A layer of 20 six-input LUTs with the stand-in truth tables is driven with
// random input vectors; every LUT output is compared with the truth-table bit,
// recomputed here from the stand-in formula, at the address formed by that
// LUT's six input bits.
module tb_lut_layer;
  int checks = 0, failures = 0;

  localparam int unsigned L = 20, K = 6;

  logic [L*K-1:0] li;
  logic [L-1:0]   lo;

  lut_layer #(.NUM_LUTS(L), .K(K)) dut (.lut_in_i(li), .lut_out_o(lo));

  initial begin : watchdog
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] tt;
    int unsigned addr;
    for (int n = 0; n < 300; n++) begin
      li = {$urandom, $urandom, $urandom, $urandom};
      #1;
      for (int l = 0; l < L; l++) begin
        tt = dwn_pkg::default_lut_init(l);
        addr = 0;
        for (int j = 0; j < K; j++) addr |= int'(li[l*K + j]) << j;
        checks++;
        if (lo[l] !== tt[addr]) begin
          failures++;
          if (failures < 10) $display("LUT %0d addr %0d got %b", l, addr, lo[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
