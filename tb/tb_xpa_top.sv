// tb_xpa_top -- end-to-end test of the sorter at its default size (N = 5,
// W = 8), with no parameter overrides.
//
// 1. The worked example A = 8,6,9,5,7: T must be the printed matrix, the
//    ranks 3,1,4,0,2, the minimum at index 3, the maximum at index 2, and the
//    key 9 found at index 2. done_o must come 3 cycles after start.
// 2. 400 random operations, alternately on wide values and on values 0..3
//    (many ties), each checked in full against a reference computed here:
//    T, ranks, min, max, rank selection, both rank tests and the search.
// Every mechanism of the design is counted and must occur at least once:
// equal elements, search hit and miss, a start accepted in the DONE phase
// (back-to-back), a start ignored while busy, a master clear of a non-empty
// T, the results holding in IDLE, and the grouped rank test answering both a
// certain "yes" for j >= 2 and a wrong "no".
module tb_xpa_top;
  import xpa_pkg::*;

  localparam int N  = 5;
  localparam int W  = 8;
  localparam int RW = idx_bits(N);

  int checks = 0, failures = 0;
  int n_tie = 0, n_hit = 0, n_miss = 0, n_b2b = 0, n_ign = 0, n_clr = 0, n_hold = 0;
  int n_est_yes = 0, n_est_no = 0;

  logic clk = 0, rst_n = 0;
  logic a_we = 0, key_we = 0, start = 0;
  logic [RW-1:0] a_addr = '0;
  logic [W-1:0] a_wdata = '0, key = '0;
  logic busy, done, valid;
  logic [RW-1:0] q_rank = '0, q_elem = '0;
  logic [RW:0] q_j = '0;
  logic [N-1:0][N-1:0] t;
  logic [N-1:0][RW-1:0] rank;
  logic [RW-1:0] min_idx, max_idx, sel_idx, srch_idx;
  logic sel_found, ge, ge_est, srch_found;
  logic [N-1:0] srch_hit;

  always #5 clk = ~clk;

  xpa_top dut (
    .clk, .rst_n, .a_we_i(a_we), .a_addr_i(a_addr), .a_wdata_i(a_wdata),
    .key_we_i(key_we), .key_i(key), .start_i(start),
    .busy_o(busy), .done_o(done), .valid_o(valid),
    .q_rank_i(q_rank), .q_elem_i(q_elem), .q_j_i(q_j),
    .t_o(t), .rank_o(rank), .min_idx_o(min_idx), .max_idx_o(max_idx),
    .sel_idx_o(sel_idx), .sel_found_o(sel_found), .ge_o(ge), .ge_est_o(ge_est),
    .srch_idx_o(srch_idx), .srch_found_o(srch_found), .srch_hit_o(srch_hit));

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

  int a [N];
  logic [W-1:0] k_cur;

  task automatic write_list(input int v [N], input logic [W-1:0] kv);
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      a_we = 1; a_addr = RW'(i); a_wdata = W'(v[i]);
      a[i] = v[i];
    end
    @(negedge clk);
    a_we = 0; key_we = 1; key = kv; k_cur = kv;
    @(negedge clk);
    key_we = 0;
  endtask

  // start one operation and wait for done; returns the latency in cycles
  task automatic run(output int lat);
    @(negedge clk);
    if (t != '0) n_clr++;
    start = 1;
    @(posedge clk);
    lat = 0;
    #1 start = 0;
    // a start while busy must be ignored
    if ($urandom % 2) begin
      @(negedge clk);
      if (busy) begin
        start = 1;
        n_ign++;
      end
      @(posedge clk);
      #1 start = 0;
      lat++;
    end
    while (!done && lat < 20) begin
      @(posedge clk);
      lat++;
      #1;
    end
    lat++;  // count the start edge
  endtask

  function automatic bit below(int i, int k);
    return (a[k] < a[i]) || (a[k] == a[i] && k < i);
  endfunction

  task automatic check_results(input string tag);
    int r [N];
    int mn, mx;
    chk(valid, {tag, " valid"});
    for (int i = 0; i < N; i++) begin
      r[i] = 0;
      for (int k = 0; k < N; k++) begin
        bit e;
        e = (i != k) && below(i, k);
        if (e) r[i]++;
        chk(t[i][k] == e, $sformatf("%s T[%0d][%0d]", tag, i, k));
      end
      chk(rank[i] == RW'(r[i]), $sformatf("%s rank[%0d]=%0d exp %0d", tag, i, rank[i], r[i]));
    end
    mn = 0; mx = 0;
    for (int i = 0; i < N; i++) begin
      if (r[i] == 0)     mn = i;
      if (r[i] == N - 1) mx = i;
    end
    chk(min_idx == RW'(mn), {tag, " min"});
    chk(max_idx == RW'(mx), {tag, " max"});
    for (int q = 0; q < N; q++) begin
      q_rank = RW'(q);
      #1;
      chk(sel_found && rank[sel_idx] == RW'(q) && r[sel_idx] == q, $sformatf("%s select %0d", tag, q));
    end
    for (int e = 0; e < N; e++) begin
      q_elem = RW'(e);
      q_j = (RW + 1)'($urandom % (N + 1));
      #1;
      chk(ge == (r[e] >= int'(q_j)), $sformatf("%s ge e=%0d j=%0d", tag, e, q_j));
      begin
        // grouped test, groups of 2 bits: yes iff some pair of T[e] sums to j or more
        bit est;
        est = 0;
        for (int g = 0; g < N; g += 2)
          if (int'(t[e][g]) + ((g + 1 < N) ? int'(t[e][g + 1]) : 0) >= int'(q_j)) est = 1;
        chk(ge_est == est, $sformatf("%s ge_est e=%0d j=%0d", tag, e, q_j));
        if (est && q_j >= 2) n_est_yes++;
        if (!est && r[e] >= int'(q_j)) n_est_no++;
      end
    end
    begin
      bit any;
      any = 0;
      for (int i = 0; i < N; i++) begin
        chk(srch_hit[i] == (W'(a[i]) == k_cur), $sformatf("%s search bit %0d", tag, i));
        if (W'(a[i]) == k_cur) any = 1;
      end
      chk(srch_found == any, {tag, " found"});
      if (any) n_hit++; else n_miss++;
      if ($countones(srch_hit) == 1) chk(W'(a[srch_idx]) == k_cur, {tag, " search index"});
    end
    for (int i = 0; i < N; i++)
      for (int k = i + 1; k < N; k++) if (a[i] == a[k]) n_tie++;
  endtask

  initial begin
    int lat;
    int ex [N] = '{8, 6, 9, 5, 7};
    // printed T for the example, row i = T[i][0..4]
    logic [4:0] ex_t [N] = '{5'b01011, 5'b00010, 5'b11011, 5'b00000, 5'b01010};
    int ex_r [N] = '{3, 1, 4, 0, 2};
    int v [N];

    repeat (3) @(posedge clk);
    rst_n = 1;

    write_list(ex, 8'd9);
    run(lat);
    chk(lat == 3, $sformatf("latency %0d", lat));
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      // ex_t[i] is written left to right as T[i][0] .. T[i][4]
      for (int k = 0; k < N; k++)
        chk(t[i][k] == ex_t[i][N-1-k], $sformatf("example T[%0d][%0d]", i, k));
      chk(rank[i] == RW'(ex_r[i]), $sformatf("example rank %0d", i));
    end
    chk(min_idx == 3'd3, "example min");
    chk(max_idx == 3'd2, "example max");
    chk(srch_found && srch_idx == 3'd2, "example search 9");
    check_results("example");

    for (int it = 0; it < 400; it++) begin
      logic [W-1:0] kv;
      for (int i = 0; i < N; i++) v[i] = (it % 2) ? ($urandom % 4) : ($urandom % 256);
      kv = ($urandom % 2) ? W'(v[$urandom % N]) : W'($urandom);
      write_list(v, kv);
      if (it % 5 == 4) begin
        // back-to-back: start again in the DONE cycle
        @(negedge clk);
        start = 1;
        @(posedge clk);
        #1 start = 0;
        while (!done) begin
          @(posedge clk);
          #1;
        end
        start = 1;        // done is high now: this start is taken
        @(posedge clk);
        #1 start = 0;
        chk(busy, "back-to-back start accepted");
        n_b2b++;
        while (!done) begin
          @(posedge clk);
          #1;
        end
      end else begin
        run(lat);
        chk(lat == 3, $sformatf("latency %0d", lat));
      end
      @(negedge clk);
      check_results($sformatf("run %0d", it));
      if (it % 7 == 0) begin
        repeat (3) @(negedge clk);
        chk(!busy && valid, "results held in idle");
        check_results($sformatf("hold %0d", it));
        n_hold++;
      end
    end

    $display("mechanisms: ties=%0d search_hit=%0d search_miss=%0d back_to_back=%0d ignored_start=%0d clear=%0d hold=%0d est_yes=%0d est_false_no=%0d",
             n_tie, n_hit, n_miss, n_b2b, n_ign, n_clr, n_hold, n_est_yes, n_est_no);
    chk(n_tie > 0, "ties seen");
    chk(n_hit > 0, "search hit seen");
    chk(n_miss > 0, "search miss seen");
    chk(n_b2b > 0, "back-to-back seen");
    chk(n_ign > 0, "ignored start seen");
    chk(n_clr > 0, "clear of non-empty T seen");
    chk(n_hold > 0, "hold seen");
    chk(n_est_yes > 0, "grouped rank test: yes for j >= 2 seen");
    chk(n_est_no > 0, "grouped rank test: false no seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
