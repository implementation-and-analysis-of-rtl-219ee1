// tb_popcount: self-checking test of the popcount.
//
// The default size (480 inputs, one class of the large model) and an odd size
// (7 inputs, exhaustively) are checked. The 480-bit instance gets all zeros,
// all ones, single ones and random vectors of varying density; each count is
// compared with a bit-by-bit count made here.
module tb_popcount;
  int checks = 0, failures = 0;

  localparam int unsigned N = 480, W = 9;

  logic [N-1:0] b;  logic [W-1:0] c;
  logic [6:0]   b7; logic [2:0]   c7;

  popcount dut (.bits_i(b), .count_o(c));
  popcount #(.N(7)) u_7 (.bits_i(b7), .count_o(c7));

  initial begin : watchdog
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    int e;
    #1;
    e = 0;
    for (int i = 0; i < N; i++) e += int'(b[i]);
    checks++;
    if (int'(c) != e) begin failures++; if (failures < 10) $display("N=480 expected %0d got %0d", e, c); end
  endtask

  initial begin
    int d, e;
    b = '0; check();
    b = '1; check();
    for (int i = 0; i < N; i += 37) begin b = '0; b[i] = 1'b1; check(); end
    for (int n = 0; n < 400; n++) begin
      d = n % 9;
      for (int i = 0; i < N; i++) b[i] = ($urandom % 8) < d;
      check();
    end
    for (int v = 0; v < 128; v++) begin
      b7 = 7'(v);
      #1;
      e = $countones(b7);
      checks++;
      if (int'(c7) != e) begin failures++; $display("N=7 in %b expected %0d got %0d", b7, e, c7); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
