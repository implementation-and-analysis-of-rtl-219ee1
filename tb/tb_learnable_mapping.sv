// tb_learnable_mapping: self-checking test of the trained interconnect.
//
// A small mapping (40 encoder bits onto 4 LUTs of 6 inputs) is checked two
// ways: with the default (stand-in) mapping, recomputed here from the mapping
// formula, and with an explicit mapping. Random input vectors and one-hot
// vectors are applied and every output bit is compared with the input bit its
// map entry names.
module tb_learnable_mapping;
  int checks = 0, failures = 0;

  localparam int unsigned IN_BITS = 40, K = 6, OUT_BITS = 4 * K, IDX_W = 6;
  localparam int unsigned IN2 = 8, OUT2 = 6, IDX2 = 3;
  localparam logic [OUT2-1:0][IDX2-1:0] MAP2 = {3'd7, 3'd0, 3'd0, 3'd5, 3'd2, 3'd3};

  logic [IN_BITS-1:0] bi;  logic [OUT_BITS-1:0] bo;
  logic [IN2-1:0]     bi2; logic [OUT2-1:0]     bo2;

  learnable_mapping #(.IN_BITS(IN_BITS), .OUT_BITS(OUT_BITS), .K(K), .IDX_W(IDX_W)) u_a (.bits_i(bi), .bits_o(bo));
  learnable_mapping #(.IN_BITS(IN2), .OUT_BITS(OUT2), .K(3), .IDX_W(IDX2), .MAP(MAP2)) u_b (.bits_i(bi2), .bits_o(bo2));

  initial begin : watchdog
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_a();
    int unsigned src;
    #1;
    for (int o = 0; o < OUT_BITS; o++) begin
      src = dwn_pkg::default_map(o / K, o % K, IN_BITS);
      checks++;
      if (bo[o] !== bi[src]) begin
        failures++;
        if (failures < 10) $display("A: out %0d expected in[%0d]=%b got %b", o, src, bi[src], bo[o]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < IN_BITS; i++) begin
      bi = '0; bi[i] = 1'b1; check_a();
    end
    for (int n = 0; n < 200; n++) begin
      bi = {$urandom, $urandom};
      check_a();
    end
    for (int n = 0; n < 256; n++) begin
      bi2 = 8'(n);
      #1;
      for (int o = 0; o < OUT2; o++) begin
        checks++;
        if (bo2[o] !== bi2[MAP2[o]]) begin
          failures++;
          if (failures < 20) $display("B: in=%h out %0d got %b", bi2, o, bo2[o]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
