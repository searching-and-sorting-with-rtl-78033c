// tb_xpa_pe -- checks the compare-and-exchange rules of one PE.
//
// The PE under test has class 2 with class 1 on its left (so it sends its
// element left and waits for a result bit) and class 4 on its right (so it
// receives the right element, compares and answers). A second instance with
// no neighbours checks the line ends. Elements, neighbour data and result
// bits are random, with many equal pairs; expected values follow the rules
// written out independently below.
module tb_xpa_pe;

  localparam int W = 4;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, load = 0, cmp_en = 0;
  logic [W-1:0] elem_in, key, l_dat_i, r_dat_i, l_dat_o, r_dat_o;
  logic l_sig_i, r_sig_i, l_sig_o, r_sig_o, set_l, set_r, match;
  logic [W-1:0] e_l_dat_o, e_r_dat_o;
  logic e_l_sig_o, e_r_sig_o, e_set_l, e_set_r, e_match;

  always #5 clk = ~clk;

  xpa_pe #(.W(W), .CLS(2), .CLS_L(1), .CLS_R(4)) dut (
    .clk, .rst_n, .load_i(load), .elem_i(elem_in), .cmp_en_i(cmp_en), .key_i(key),
    .l_dat_o, .l_dat_i, .l_sig_o, .l_sig_i, .r_dat_o, .r_dat_i, .r_sig_o, .r_sig_i,
    .set_l_o(set_l), .set_r_o(set_r), .match_o(match));

  xpa_pe #(.W(W), .CLS(0), .CLS_L(-1), .CLS_R(-1)) dut_end (
    .clk, .rst_n, .load_i(load), .elem_i(elem_in), .cmp_en_i(cmp_en), .key_i(key),
    .l_dat_o(e_l_dat_o), .l_dat_i(l_dat_i), .l_sig_o(e_l_sig_o), .l_sig_i(l_sig_i),
    .r_dat_o(e_r_dat_o), .r_dat_i(r_dat_i), .r_sig_o(e_r_sig_o), .r_sig_i(r_sig_i),
    .set_l_o(e_set_l), .set_r_o(e_set_r), .match_o(e_match));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] a;
    elem_in = '0; key = '0; l_dat_i = '0; r_dat_i = '0; l_sig_i = 0; r_sig_i = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 500; it++) begin
      a = W'($urandom);
      elem_in = a;
      load = 1;
      @(posedge clk);
      #1 load = 0;
      elem_in = W'($urandom);  // must not matter after the load
      for (int k = 0; k < 4; k++) begin
        cmp_en  = 1'($urandom);
        l_dat_i = W'($urandom);
        r_dat_i = ($urandom % 3 == 0) ? a : W'($urandom);
        l_sig_i = 1'($urandom);
        r_sig_i = 1'($urandom);
        key     = ($urandom % 2) ? a : W'($urandom);
        #1;
        // left neighbour has the lower class: send own element, obey the bit
        chk(l_dat_o == a, "left: element sent");
        chk(l_sig_o == 1'b0, "left: no result bit sent");
        chk(set_l == (cmp_en & l_sig_i), "left: T set from returned bit");
        // right neighbour has the higher class: compare
        chk(r_dat_o == '0, "right: nothing sent");
        chk(set_r == (cmp_en & (r_dat_i < a)), $sformatf("right: set a=%0d b=%0d", a, r_dat_i));
        chk(r_sig_o == !(r_dat_i < a), "right: returned bit");
        chk(match == (key == a), "match");
        // line ends
        chk(!e_set_l && !e_set_r && !e_l_sig_o && !e_r_sig_o &&
            e_l_dat_o == '0 && e_r_dat_o == '0, "end PE silent");
        chk(e_match == (key == a), "end PE match");
      end
      cmp_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
