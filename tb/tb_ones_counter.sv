// tb_ones_counter -- exhaustive check of the 7-input 1's counter: output e
// is one-hot at the number of ones (inputs with all 7 bits set have no
// output, since a row of T never holds more than N-1 ones).
module tb_ones_counter;

  int checks = 0, failures = 0;
  logic [6:0] x, e;

  ones_counter #(.N(7)) dut (.t_row_i(x), .e_o(e));

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
      logic [6:0] expv;
      x = 7'(v);
      ones = 0;
      for (int b = 0; b < 7; b++) if ((v >> b) & 1) ones++;
      expv = (ones < 7) ? 7'(1 << ones) : 7'd0;
      #1;
      chk(e == expv, $sformatf("x=%b e=%b exp=%b", x, e, expv));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
