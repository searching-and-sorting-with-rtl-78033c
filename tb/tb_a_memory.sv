// tb_a_memory -- element memory for N = 5, W = 8: reset contents 0, random
// writes (including to the unused addresses 5..7, which must be ignored)
// show up on the matching lane of the load bus after the clock edge, and the
// key register is written on its own strobe.
module tb_a_memory;

  localparam int N = 5, W = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, we = 0, kwe = 0;
  logic [2:0] addr;
  logic [W-1:0] wdata, kin, kout;
  logic [N-1:0][W-1:0] bus, model;
  logic [W-1:0] kmodel;

  always #5 clk = ~clk;

  a_memory #(.N(N), .W(W)) dut (.clk, .rst_n, .we_i(we), .addr_i(addr), .wdata_i(wdata),
    .key_we_i(kwe), .key_i(kin), .bus_o(bus), .key_o(kout));

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
    addr = '0; wdata = '0; kin = '0;
    model = '0; kmodel = '0;
    repeat (2) @(posedge clk);
    #1 chk(bus == '0 && kout == '0, "reset");
    rst_n = 1;
    for (int it = 0; it < 1000; it++) begin
      we = 1'($urandom);
      kwe = ($urandom % 4 == 0);
      addr = 3'($urandom);
      wdata = W'($urandom);
      kin = W'($urandom);
      @(posedge clk);
      if (we && addr < N) model[addr] = wdata;
      if (kwe) kmodel = kin;
      #1;
      chk(bus == model, "bus");
      chk(kout == kmodel, "key");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
