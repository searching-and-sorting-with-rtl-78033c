// tb_delta_circuit -- exhaustive check of Delta(m) for 6 inputs and
// m = 0, 2 and 5: the output is 1 exactly when m inputs are 1.
module tb_delta_circuit;

  int checks = 0, failures = 0;
  logic [5:0] x;
  logic q0, q2, q5;

  delta_circuit #(.N(6), .M(0)) d0 (.x_i(x), .q_o(q0));
  delta_circuit #(.N(6), .M(2)) d2 (.x_i(x), .q_o(q2));
  delta_circuit #(.N(6), .M(5)) d5 (.x_i(x), .q_o(q5));

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
    for (int v = 0; v < 64; v++) begin
      int ones;
      x = 6'(v);
      ones = 0;
      for (int b = 0; b < 6; b++) if ((v >> b) & 1) ones++;
      #1;
      chk(q0 == (ones == 0), $sformatf("D(0) x=%b", x));
      chk(q2 == (ones == 2), $sformatf("D(2) x=%b", x));
      chk(q5 == (ones == 5), $sformatf("D(5) x=%b", x));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
