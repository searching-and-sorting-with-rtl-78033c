// tb_crosspoint_array -- the whole line of PEs and crosspoints for N = 5,
// N = 7 and N = 6 (even). Random element lists, many with repeated values,
// are loaded; with the crosspoints closed the write requests must equal the
// complete comparison matrix, T[i][k] = A[k] < A[i] or (A[k] == A[i] and
// k < i), and with them open there must be none. The search match vector is
// checked against a key that is present or absent.
module tb_crosspoint_array;

  localparam int W = 4;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, load = 0, cmp = 0;
  logic [W-1:0] key;
  logic [6:0][W-1:0] a;
  logic [4:0][4:0] set5;
  logic [6:0][6:0] set7;
  logic [5:0][5:0] set6;
  logic [4:0] m5;
  logic [6:0] m7;
  logic [5:0] m6;

  always #5 clk = ~clk;

  crosspoint_array #(.N(5), .W(W)) u5 (.clk, .rst_n, .load_i(load), .cmp_en_i(cmp),
    .bus_i(a[4:0]), .key_i(key), .set_o(set5), .match_o(m5));
  crosspoint_array #(.N(7), .W(W)) u7 (.clk, .rst_n, .load_i(load), .cmp_en_i(cmp),
    .bus_i(a), .key_i(key), .set_o(set7), .match_o(m7));
  crosspoint_array #(.N(6), .W(W)) u6 (.clk, .rst_n, .load_i(load), .cmp_en_i(cmp),
    .bus_i(a[5:0]), .key_i(key), .set_o(set6), .match_o(m6));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  function automatic logic lt(logic [6:0][W-1:0] v, int i, int k);
    return (v[k] < v[i]) || (v[k] == v[i] && k < i);
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [6:0][W-1:0] ld;
    a = '0; key = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      for (int i = 0; i < 7; i++) ld[i] = (it % 2) ? W'($urandom % 4) : W'($urandom);
      a = ld;
      load = 1;
      @(posedge clk);
      #1 load = 0;
      a = ~ld;              // the bus changes after the load; PEs must keep theirs
      key = ($urandom % 2) ? ld[$urandom % 7] : W'($urandom);
      cmp = 0;
      #1;
      chk(set5 == '0 && set7 == '0 && set6 == '0, "no requests while open");
      cmp = 1;
      #1;
      for (int i = 0; i < 7; i++)
        for (int k = 0; k < 7; k++) begin
          logic e;
          e = (i != k) && lt(ld, i, k);
          chk(set7[i][k] == e, $sformatf("N=7 it %0d T[%0d][%0d]", it, i, k));
          if (i < 5 && k < 5) chk(set5[i][k] == e, $sformatf("N=5 it %0d T[%0d][%0d]", it, i, k));
          if (i < 6 && k < 6) chk(set6[i][k] == e, $sformatf("N=6 it %0d T[%0d][%0d]", it, i, k));
        end
      for (int i = 0; i < 7; i++) begin
        chk(m7[i] == (ld[i] == key), "N=7 match");
        if (i < 5) chk(m5[i] == (ld[i] == key), "N=5 match");
        if (i < 6) chk(m6[i] == (ld[i] == key), "N=6 match");
      end
      @(posedge clk);
      #1 cmp = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
