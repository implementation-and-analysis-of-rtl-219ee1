// tb_index_comparator: exhaustive self-checking test of one argmax node.
//
// With 3-bit values and 2-bit indices, every combination of the two values
// and a set of index pairs is applied. Expected: the larger value and its
// index; on equal values the value and index of input A.
module tb_index_comparator;
  int checks = 0, failures = 0;

  logic [2:0] va, vb, vo;
  logic [1:0] ia, ib, io;

  index_comparator #(.VAL_W(3), .IDX_W(2)) dut (
    .in_value_a(va), .in_value_b(vb), .in_index_a(ia), .in_index_b(ib),
    .out_max_value(vo), .out_max_index(io));

  initial begin : watchdog
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ev, ei;
    for (int a = 0; a < 8; a++)
      for (int b2 = 0; b2 < 8; b2++)
        for (int p = 0; p < 4; p++) begin
          va = 3'(a); vb = 3'(b2); ia = 2'(p); ib = 2'(3 - p);
          #1;
          ev = (a >= b2) ? a : b2;
          ei = (a >= b2) ? p : 3 - p;
          checks++;
          if (int'(vo) != ev || int'(io) != ei) begin
            failures++;
            $display("a=%0d/%0d b=%0d/%0d got %0d/%0d", a, p, b2, 3 - p, vo, io);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
