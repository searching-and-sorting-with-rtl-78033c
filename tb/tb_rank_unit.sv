// tb_rank_unit -- rank conversion for N = 5 (the worked example of the
// sorting algorithm: A = 8,6,9,5,7 gives ranks 3,1,4,0,2) and for N = 9 with
// random lists, where the T matrix is formed in the testbench and every rank
// must equal the count of smaller elements.
module tb_rank_unit;

  int checks = 0, failures = 0;
  logic [4:0][4:0] t5;
  logic [4:0][2:0] r5;
  logic [8:0][8:0] t9;
  logic [8:0][3:0] r9;

  rank_unit #(.N(5)) u5 (.t_i(t5), .rank_o(r5));
  rank_unit #(.N(9)) u9 (.t_i(t9), .rank_o(r9));

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
    int a5 [5] = '{8, 6, 9, 5, 7};
    int exp5 [5] = '{3, 1, 4, 0, 2};
    int a9 [9];
    for (int i = 0; i < 5; i++)
      for (int k = 0; k < 5; k++)
        t5[i][k] = (a5[k] < a5[i]) || (a5[k] == a5[i] && k < i);
    t9 = '0;
    #1;
    for (int i = 0; i < 5; i++) chk(r5[i] == 3'(exp5[i]), $sformatf("example rank %0d", i));
    for (int it = 0; it < 300; it++) begin
      for (int i = 0; i < 9; i++) a9[i] = $urandom % 8;
      for (int i = 0; i < 9; i++)
        for (int k = 0; k < 9; k++)
          t9[i][k] = (a9[k] < a9[i]) || (a9[k] == a9[i] && k < i);
      #1;
      for (int i = 0; i < 9; i++) begin
        int c;
        c = 0;
        for (int k = 0; k < 9; k++) if (a9[k] < a9[i] || (a9[k] == a9[i] && k < i)) c++;
        chk(r9[i] == 4'(c), $sformatf("N=9 rank %0d: %0d vs %0d", i, r9[i], c));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
