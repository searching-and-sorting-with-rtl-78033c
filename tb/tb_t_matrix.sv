// tb_t_matrix -- the T register matrix (N = 5): reset to 0, sets
// accumulate only while we_i is high, the per-row master clear wipes exactly
// its rows and wins over a set in the same cycle. A model matrix kept in the
// testbench is compared after every clock.
module tb_t_matrix;

  localparam int N = 5;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, we = 0;
  logic [N-1:0] clr = '0;
  logic [N-1:0][N-1:0] set = '0, t, model;

  always #5 clk = ~clk;

  t_matrix #(.N(N)) dut (.clk, .rst_n, .clr_i(clr), .we_i(we), .set_i(set), .t_o(t));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = '0;
    repeat (2) @(posedge clk);
    #1 chk(t == '0, "reset value");
    rst_n = 1;
    for (int it = 0; it < 1000; it++) begin
      clr = ($urandom % 4 == 0) ? N'($urandom) : '0;
      we  = 1'($urandom);
      for (int i = 0; i < N; i++) begin
        set[i] = N'($urandom) & N'($urandom);
        set[i][i] = 1'b0;
      end
      @(posedge clk);
      for (int i = 0; i < N; i++)
        if (clr[i])  model[i] = '0;
        else if (we) model[i] = model[i] | set[i];
      #1 chk(t == model, $sformatf("it %0d", it));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
