// xpa_sort_runner -- testbench helper: one xpa_top of size N driven through
// NOPS random sort operations and checked against a reference model.
//
// Each operation writes NE random elements into A[0..NE-1] and fills the
// remaining N-NE classes with the largest W-bit value. Padding sits at the
// highest indices, and equal elements rank the higher index above, so the
// padding always takes the top ranks and the real elements are sorted among
// themselves. This is the way to sort an even number of elements on an array
// with an odd number of classes. After done_o it checks every bit of T, every
// rank, min/max and the select-by-rank path, and reads the sorted order out by
// selecting ranks 0..NE-1 in turn: the values must come out non-decreasing and
// be a permutation of the input. The latency must be 3 cycles.
//
// Ports: clk in; checks_o, failures_o, ties_o counters; finished_o goes high
// after the last operation. The parent testbench owns the watchdog and
// prints the result.
module xpa_sort_runner
  import xpa_pkg::*;
#(
  parameter int N    = 7,
  parameter int NE   = N,
  parameter int W    = 8,
  parameter int NOPS = 50
) (
  input  logic clk,
  output int   checks_o,
  output int   failures_o,
  output int   ties_o,
  output logic finished_o
);

  localparam int RW = idx_bits(N);

  logic rst_n = 0;
  logic a_we = 0, key_we = 0, start = 0;
  logic [RW-1:0] a_addr = '0;
  logic [W-1:0] a_wdata = '0, key = '0;
  logic busy, done, valid;
  logic [RW-1:0] q_rank = '0, q_elem = '0;
  logic [RW:0] q_j = '0;
  logic [N-1:0][N-1:0] t;
  logic [N-1:0][RW-1:0] rank;
  logic [RW-1:0] min_idx, max_idx, sel_idx, srch_idx;
  logic sel_found, ge, srch_found;
  logic [N-1:0] srch_hit;

  xpa_top #(.N(N), .W(W)) dut (
    .clk, .rst_n, .a_we_i(a_we), .a_addr_i(a_addr), .a_wdata_i(a_wdata),
    .key_we_i(key_we), .key_i(key), .start_i(start),
    .busy_o(busy), .done_o(done), .valid_o(valid),
    .q_rank_i(q_rank), .q_elem_i(q_elem), .q_j_i(q_j),
    .t_o(t), .rank_o(rank), .min_idx_o(min_idx), .max_idx_o(max_idx),
    .sel_idx_o(sel_idx), .sel_found_o(sel_found), .ge_o(ge), .ge_est_o(),
    .srch_idx_o(srch_idx), .srch_found_o(srch_found), .srch_hit_o(srch_hit));

  int checks = 0, failures = 0, ties = 0;
  logic finished = 0;
  assign checks_o   = checks;
  assign failures_o = failures;
  assign ties_o     = ties;
  assign finished_o = finished;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL (N=%0d): %s", N, msg);
    end
  endtask

  int a [N];

  function automatic bit below(int i, int k);
    return (a[k] < a[i]) || (a[k] == a[i] && k < i);
  endfunction

  initial begin
    int lat, r [N], prev;
    bit seen [N];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < NOPS; it++) begin
      for (int i = 0; i < N; i++)
        a[i] = (i < NE) ? int'($urandom % ((it % 2 == 1) ? 8 : (1 << W))) : (1 << W) - 1;
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        a_we = 1; a_addr = RW'(i); a_wdata = W'(a[i]);
      end
      @(negedge clk);
      a_we = 0; start = 1;
      @(posedge clk);
      #1 start = 0;
      lat = 1;
      while (!done && lat < 20) begin
        @(posedge clk);
        #1 lat++;
      end
      chk(lat == 3, $sformatf("latency %0d", lat));
      @(negedge clk);
      chk(valid, "valid");
      for (int i = 0; i < N; i++) begin
        r[i] = 0;
        for (int k = 0; k < N; k++) begin
          bit e;
          e = (i != k) && below(i, k);
          if (e) r[i]++;
          chk(t[i][k] == e, $sformatf("op %0d T[%0d][%0d]", it, i, k));
        end
        chk(rank[i] == RW'(r[i]), $sformatf("op %0d rank[%0d]", it, i));
      end
      for (int i = 0; i < N; i++) begin
        if (r[i] == 0)     chk(min_idx == RW'(i), $sformatf("op %0d min", it));
        if (r[i] == N - 1) chk(max_idx == RW'(i), $sformatf("op %0d max", it));
      end
      for (int i = NE; i < N; i++)
        chk(r[i] >= NE, $sformatf("op %0d padding %0d ranks above the data", it, i));
      // read the sorted order out through the select-by-rank query
      prev = -1;
      seen = '{default: 1'b0};
      for (int q = 0; q < NE; q++) begin
        q_rank = RW'(q);
        #1;
        chk(sel_found && int'(sel_idx) < NE, $sformatf("op %0d select %0d", it, q));
        chk(a[sel_idx] >= prev, $sformatf("op %0d sorted order at rank %0d", it, q));
        prev = a[sel_idx];
        chk(!seen[sel_idx], $sformatf("op %0d index %0d selected twice", it, sel_idx));
        seen[sel_idx] = 1'b1;
      end
      for (int i = 0; i < NE; i++)
        for (int k = i + 1; k < NE; k++) if (a[i] == a[k]) ties++;
    end
    finished = 1;
  end

endmodule
