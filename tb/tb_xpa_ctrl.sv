// tb_xpa_ctrl -- phase sequence of the controller: IDLE -> LOAD -> CMP ->
// DONE with one cycle each, done_o exactly 3 cycles after the start edge,
// starts during LOAD and CMP ignored, a start in DONE begins the next
// operation at once, and valid_o drops on LOAD and rises on DONE.
module tb_xpa_ctrl;
  import xpa_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic load, clr, cmp, busy, done, valid;
  phase_e ph;

  always #5 clk = ~clk;

  xpa_ctrl dut (.clk, .rst_n, .start_i(start), .load_o(load), .clr_o(clr), .cmp_o(cmp),
    .busy_o(busy), .done_o(done), .valid_o(valid), .phase_o(ph));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // expected phase model
  phase_e m;
  logic mvalid;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t_start, lat;
    m = PH_IDLE; mvalid = 0;
    repeat (2) @(posedge clk);
    #1 chk(ph == PH_IDLE && !valid && !busy && !done, "reset");
    rst_n = 1;
    // latency of one isolated operation
    @(negedge clk) start = 1;
    @(posedge clk) t_start = 0;
    #1 start = 0;
    lat = 0;
    while (!done && lat < 10) begin
      @(posedge clk);
      lat++;
      #1;
    end
    // done seen lat edges after the start edge; the start edge itself is edge 0
    chk(lat + 1 == 3, $sformatf("latency %0d cycles", lat + 1));
    @(posedge clk);
    // random starts against the model
    m = PH_IDLE; mvalid = 1;
    #1 chk(ph == m, "back to idle");
    for (int it = 0; it < 1000; it++) begin
      start = 1'($urandom);
      @(posedge clk);
      case (m)
        PH_IDLE: if (start) m = PH_LOAD;
        PH_LOAD: m = PH_CMP;
        PH_CMP:  m = PH_DONE;
        PH_DONE: m = start ? PH_LOAD : PH_IDLE;
        default: m = PH_IDLE;
      endcase
      if (m == PH_LOAD) mvalid = 0;
      else if (m == PH_DONE) mvalid = 1;
      #1;
      chk(ph == m, $sformatf("phase it %0d", it));
      chk(load == (m == PH_LOAD) && clr == (m == PH_LOAD), "load/clr");
      chk(cmp == (m == PH_CMP), "cmp");
      chk(busy == (m == PH_LOAD || m == PH_CMP), "busy");
      chk(done == (m == PH_DONE), "done");
      chk(valid == mvalid, "valid");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
