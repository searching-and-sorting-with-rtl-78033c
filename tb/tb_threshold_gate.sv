// tb_threshold_gate -- exhaustive check of unit-weight threshold gates with
// 7 inputs and thresholds 0, 1, 3, 7 and 8.
module tb_threshold_gate;

  int checks = 0, failures = 0;
  logic [6:0] x;
  logic y0, y1, y3, y7, y8;

  threshold_gate #(.N(7), .THR(0)) g0 (.x_i(x), .y_o(y0));
  threshold_gate #(.N(7), .THR(1)) g1 (.x_i(x), .y_o(y1));
  threshold_gate #(.N(7), .THR(3)) g3 (.x_i(x), .y_o(y3));
  threshold_gate #(.N(7), .THR(7)) g7 (.x_i(x), .y_o(y7));
  threshold_gate #(.N(7), .THR(8)) g8 (.x_i(x), .y_o(y8));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 128; v++) begin
      int ones;
      x = 7'(v);
      ones = 0;
      for (int b = 0; b < 7; b++) if ((v >> b) & 1) ones++;
      #1;
      chk(y0 == 1'b1, "THR 0");
      chk(y1 == (ones >= 1), $sformatf("THR 1 x=%b", x));
      chk(y3 == (ones >= 3), $sformatf("THR 3 x=%b", x));
      chk(y7 == (ones >= 7), $sformatf("THR 7 x=%b", x));
      chk(y8 == 1'b0, "THR 8");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
