// tb_crosspoint_switch -- checks both orientations of the crosspoint: the
// element travels from the higher-class side to the lower-class side, the
// result bit travels back, nothing leaks the other way and an open switch
// passes nothing.
module tb_crosspoint_switch;

  localparam int W = 6;
  int checks = 0, failures = 0;

  logic on;
  logic [W-1:0] ld_i, rd_i, ld0, rd0, ld1, rd1;
  logic ls_i, rs_i, ls0, rs0, ls1, rs1;

  crosspoint_switch #(.W(W), .HI_ON_LEFT(1'b0)) u0 (
    .on_i(on), .l_dat_i(ld_i), .l_dat_o(ld0), .l_sig_i(ls_i), .l_sig_o(ls0),
    .r_dat_i(rd_i), .r_dat_o(rd0), .r_sig_i(rs_i), .r_sig_o(rs0));
  crosspoint_switch #(.W(W), .HI_ON_LEFT(1'b1)) u1 (
    .on_i(on), .l_dat_i(ld_i), .l_dat_o(ld1), .l_sig_i(ls_i), .l_sig_o(ls1),
    .r_dat_i(rd_i), .r_dat_o(rd1), .r_sig_i(rs_i), .r_sig_o(rs1));

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
    for (int it = 0; it < 1000; it++) begin
      on   = 1'($urandom);
      ld_i = W'($urandom);
      rd_i = W'($urandom);
      ls_i = 1'($urandom);
      rs_i = 1'($urandom);
      #1;
      // right side higher
      chk(ld0 == (on ? rd_i : '0), "u0 element right->left");
      chk(rd0 == '0, "u0 no element left->right");
      chk(rs0 == (on & ls_i), "u0 bit left->right");
      chk(ls0 == 1'b0, "u0 no bit right->left");
      // left side higher
      chk(rd1 == (on ? ld_i : '0), "u1 element left->right");
      chk(ld1 == '0, "u1 no element right->left");
      chk(ls1 == (on & rs_i), "u1 bit right->left");
      chk(rs1 == 1'b0, "u1 no bit left->right");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
