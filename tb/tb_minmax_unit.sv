// tb_minmax_unit -- index of the minimum and maximum for N = 5 (worked
// example A = 8,6,9,5,7: minimum at 3, maximum at 2) and N = 7 with random
// lists containing repeats (first minimum and last maximum under the index
// tie-break).
module tb_minmax_unit;

  int checks = 0, failures = 0;
  logic [4:0][4:0] t5;
  logic [6:0][6:0] t7;
  logic [4:0] mn5, mx5;
  logic [6:0] mn7, mx7;
  logic [2:0] mi5, xi5, mi7, xi7;

  minmax_unit #(.N(5)) u5 (.t_i(t5), .min_hot_o(mn5), .max_hot_o(mx5), .min_idx_o(mi5), .max_idx_o(xi5));
  minmax_unit #(.N(7)) u7 (.t_i(t7), .min_hot_o(mn7), .max_hot_o(mx7), .min_idx_o(mi7), .max_idx_o(xi7));

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
    int a7 [7];
    for (int i = 0; i < 5; i++)
      for (int k = 0; k < 5; k++)
        t5[i][k] = (a5[k] < a5[i]) || (a5[k] == a5[i] && k < i);
    t7 = '0;
    #1;
    chk(mi5 == 3'd3 && mn5 == 5'b01000, "example min");
    chk(xi5 == 3'd2 && mx5 == 5'b00100, "example max");
    for (int it = 0; it < 300; it++) begin
      int mn, mx;
      for (int i = 0; i < 7; i++) a7[i] = $urandom % 5;
      for (int i = 0; i < 7; i++)
        for (int k = 0; k < 7; k++)
          t7[i][k] = (a7[k] < a7[i]) || (a7[k] == a7[i] && k < i);
      mn = 0; mx = 0;
      for (int i = 1; i < 7; i++) begin
        if (a7[i] < a7[mn])  mn = i;
        if (a7[i] >= a7[mx]) mx = i;
      end
      #1;
      chk(mi7 == 3'(mn) && mn7 == 7'(1 << mn), $sformatf("min it %0d", it));
      chk(xi7 == 3'(mx) && mx7 == 7'(1 << mx), $sformatf("max it %0d", it));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
