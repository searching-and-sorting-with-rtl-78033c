// tb_bk_adder -- exhaustive check of the Brent-Kung adder for operand
// widths 1, 3, 4 and 6 against plain addition.
module tb_bk_adder;

  int checks = 0, failures = 0;
  logic [0:0] a1, b1;
  logic [1:0] s1;
  logic [2:0] a3, b3;
  logic [3:0] s3;
  logic [3:0] a4, b4;
  logic [4:0] s4;
  logic [5:0] a6, b6;
  logic [6:0] s6;

  bk_adder #(.WID(1)) u1 (.a_i(a1), .b_i(b1), .sum_o(s1));
  bk_adder #(.WID(3)) u3 (.a_i(a3), .b_i(b3), .sum_o(s3));
  bk_adder #(.WID(4)) u4 (.a_i(a4), .b_i(b4), .sum_o(s4));
  bk_adder #(.WID(6)) u6 (.a_i(a6), .b_i(b6), .sum_o(s6));

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
    for (int x = 0; x < 64; x++)
      for (int y = 0; y < 64; y++) begin
        a1 = 1'(x); b1 = 1'(y); a3 = 3'(x); b3 = 3'(y);
        a4 = 4'(x); b4 = 4'(y); a6 = 6'(x); b6 = 6'(y);
        #1;
        chk(s6 == 7'(x + y), $sformatf("6-bit %0d+%0d=%0d", x, y, s6));
        if (x < 16 && y < 16) chk(s4 == 5'(x + y), $sformatf("4-bit %0d+%0d", x, y));
        if (x < 8 && y < 8)   chk(s3 == 4'(x + y), $sformatf("3-bit %0d+%0d", x, y));
        if (x < 2 && y < 2)   chk(s1 == 2'(x + y), "1-bit");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
