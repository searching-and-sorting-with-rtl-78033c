// tb_xpa_top_sizes -- the whole design at the sizes used as examples of the
// array construction, each sorting random lists end to end:
//   N = 7   odd, 22 PEs: every pair of classes meets exactly once;
//   N = 12  even, 72 PEs: five pairs of classes meet twice and their
//           duplicate T writes are merged;
//   N = 13  odd, 79 PEs, sorting 12 elements with one padding element, the
//           remedy for an even element count.
// Each size runs in its own xpa_sort_runner (see there for the checks); this
// module adds the watchdog, requires ties to have occurred at every size and
// prints the combined result.
module tb_xpa_top_sizes;

  logic clk = 0;
  always #5 clk = ~clk;

  int c7, f7, t7, c12, f12, t12, c13, f13, t13;
  logic d7, d12, d13;

  xpa_sort_runner #(.N(7),  .NE(7),  .W(8), .NOPS(40)) u_n7  (.clk, .checks_o(c7),  .failures_o(f7),  .ties_o(t7),  .finished_o(d7));
  xpa_sort_runner #(.N(12), .NE(12), .W(8), .NOPS(40)) u_n12 (.clk, .checks_o(c12), .failures_o(f12), .ties_o(t12), .finished_o(d12));
  xpa_sort_runner #(.N(13), .NE(12), .W(8), .NOPS(40)) u_n13 (.clk, .checks_o(c13), .failures_o(f13), .ties_o(t13), .finished_o(d13));

  int checks = 0, failures = 0;

  initial begin
    repeat (40000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c7 + c12 + c13, f7 + f12 + f13 + 1);
    $finish;
  end

  initial begin
    wait (d7 && d12 && d13);
    @(posedge clk);
    checks   = c7 + c12 + c13 + 3;
    failures = f7 + f12 + f13;
    if (t7 == 0)  failures++;
    if (t12 == 0) failures++;
    if (t13 == 0) failures++;
    $display("ties: N=7 %0d, N=12 %0d, N=13 (12 elements) %0d", t7, t12, t13);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
