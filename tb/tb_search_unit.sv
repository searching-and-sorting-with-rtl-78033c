// tb_search_unit -- the search result vector for N = 5: clear, capture on
// we_i, hold otherwise; found_o and the encoded index follow the vector.
module tb_search_unit;

  localparam int N = 5;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, we = 0;
  logic [N-1:0] match, hit, model;
  logic [2:0] idx;
  logic found;

  always #5 clk = ~clk;

  search_unit #(.N(N)) dut (.clk, .rst_n, .clr_i(clr), .we_i(we), .match_i(match),
    .hit_o(hit), .idx_o(idx), .found_o(found));

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
    match = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 1000; it++) begin
      clr = ($urandom % 4 == 0);
      we  = 1'($urandom);
      match = ($urandom % 3 == 0) ? '0 : N'(1 << ($urandom % N));
      @(posedge clk);
      if (clr) model = '0;
      else if (we) model = match;
      #1;
      chk(hit == model, "vector");
      chk(found == (model != '0), "found");
      if (model != '0)
        for (int i = 0; i < N; i++) if (model[i]) chk(idx == 3'(i), "index");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
