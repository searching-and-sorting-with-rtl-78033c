// tb_rank_adder_tree -- the adder-tree rank of a row: exhaustive for 7-bit
// rows with at most 6 ones (as in a T row, whose diagonal is 0) and for
// 8-bit rows with at most 7 ones; the result must be the number of ones.
module tb_rank_adder_tree;

  int checks = 0, failures = 0;
  logic [6:0] r7;
  logic [2:0] k7;
  logic [7:0] r8;
  logic [2:0] k8;

  rank_adder_tree #(.N(7)) u7 (.t_row_i(r7), .rank_o(k7));
  rank_adder_tree #(.N(8)) u8 (.t_row_i(r8), .rank_o(k8));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      int ones;
      ones = 0;
      for (int b = 0; b < 8; b++) if ((v >> b) & 1) ones++;
      if (ones < 8) begin
        r8 = 8'(v);
        r7 = (v < 128 && ones < 7) ? 7'(v) : 7'd0;
        #1;
        chk(k8 == 3'(ones), $sformatf("N=8 row %b -> %0d", r8, k8));
        if (v < 128 && ones < 7) chk(k7 == 3'(ones), $sformatf("N=7 row %b -> %0d", r7, k7));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
