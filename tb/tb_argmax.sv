// tb_argmax: self-checking test of the argmax tree.
//
// Two trees are checked: 5 inputs (the number of jet classes) and 4 inputs
// (the two-level tree of three comparators). Random values from a small
// range, so that ties are common, and hand-made tie cases are applied; the
// expected result is the maximum and the lowest index holding it.
module tb_argmax;
  int checks = 0, failures = 0, ties = 0;

  localparam int unsigned W = 4;

  logic [4:0][W-1:0] v5; logic [W-1:0] m5; logic [2:0] i5;
  logic [3:0][W-1:0] v4; logic [W-1:0] m4; logic [1:0] i4;

  argmax #(.N(5), .VAL_W(W)) u_5 (.values_i(v5), .max_value_o(m5), .max_index_o(i5));
  argmax #(.N(4), .VAL_W(W)) u_4 (.values_i(v4), .max_value_o(m4), .max_index_o(i4));

  initial begin : watchdog
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    int bm, bi, nmax;
    #1;
    bm = -1; bi = 0; nmax = 0;
    for (int i = 0; i < 5; i++) if (int'(v5[i]) > bm) begin bm = int'(v5[i]); bi = i; end
    for (int i = 0; i < 5; i++) if (int'(v5[i]) == bm) nmax++;
    if (nmax > 1) ties++;
    checks++;
    if (int'(m5) != bm || int'(i5) != bi) begin
      failures++;
      if (failures < 10) $display("N=5 %h: expected %0d@%0d got %0d@%0d", v5, bm, bi, m5, i5);
    end
    bm = -1; bi = 0;
    for (int i = 0; i < 4; i++) if (int'(v4[i]) > bm) begin bm = int'(v4[i]); bi = i; end
    checks++;
    if (int'(m4) != bm || int'(i4) != bi) begin
      failures++;
      if (failures < 10) $display("N=4 %h: expected %0d@%0d got %0d@%0d", v4, bm, bi, m4, i4);
    end
  endtask

  initial begin
    // every position holds the unique maximum once
    for (int p = 0; p < 5; p++) begin
      v5 = '0; v5[p] = 4'd9; v4 = '0; v4[p % 4] = 4'd9; check();
    end
    // all equal: index 0
    v5 = {5{4'd7}}; v4 = {4{4'd7}}; check();
    // tie between the last two classes and between 1 and 4
    v5 = {4'd6, 4'd6, 4'd1, 4'd2, 4'd0}; v4 = {4'd6, 4'd6, 4'd1, 4'd0}; check();
    v5 = {4'd8, 4'd2, 4'd3, 4'd8, 4'd5}; v4 = {4'd2, 4'd8, 4'd8, 4'd5}; check();
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < 5; i++) v5[i] = W'($urandom % (n < 1000 ? 4 : 16));
      for (int i = 0; i < 4; i++) v4[i] = W'($urandom % (n < 1000 ? 4 : 16));
      check();
    end
    checks++;
    if (ties == 0) begin failures++; $display("no ties exercised"); end
    $display("ties exercised: %0d", ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
