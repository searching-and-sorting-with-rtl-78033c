// tb_onehot_encoder -- the N x lg N encoder for N = 5 and N = 8: every
// one-hot input gives its index, no input gives 0 with any_o low, and two
// inputs give the OR of their indices.
module tb_onehot_encoder;

  int checks = 0, failures = 0;
  logic [4:0] d5;
  logic [7:0] d8;
  logic [2:0] k5, k8;
  logic a5, a8;

  onehot_encoder #(.N(5)) u5 (.d_i(d5), .k_o(k5), .any_o(a5));
  onehot_encoder #(.N(8)) u8 (.d_i(d8), .k_o(k8), .any_o(a8));

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
    d5 = '0; d8 = '0;
    #1;
    chk(k5 == 0 && !a5 && k8 == 0 && !a8, "no input");
    for (int i = 0; i < 8; i++) begin
      d8 = 8'(1 << i);
      d5 = (i < 5) ? 5'(1 << i) : 5'd0;
      #1;
      chk(k8 == 3'(i) && a8, $sformatf("N=8 one-hot %0d -> %0d", i, k8));
      if (i < 5) chk(k5 == 3'(i) && a5, $sformatf("N=5 one-hot %0d -> %0d", i, k5));
    end
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) begin
        d8 = 8'(1 << i) | 8'(1 << j);
        #1;
        chk(k8 == (3'(i) | 3'(j)), "two inputs OR");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
