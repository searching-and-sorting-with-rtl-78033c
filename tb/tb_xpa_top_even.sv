// tb_xpa_top_even -- the design with an even number of classes, N = 4
// (8 PEs), on the even worked example A = 6,7,8,5.
//
// With even N one pair of classes (here 1 and 2) meets at two crosspoints,
// so two PEs of class 2 set T[2][1] in the same cycle; the OR-merge of the
// write requests must make that harmless. Expected: the printed matrix
// T = [0001; 1001; 1101; 0000], ranks 1,2,3,0, minimum at 3, maximum at 2.
// The test then runs 200 random lists (values 0..3) against a reference.
module tb_xpa_top_even;
  import xpa_pkg::*;

  localparam int N  = 4;
  localparam int W  = 4;
  localparam int RW = idx_bits(N);

  int checks = 0, failures = 0;
  int n_dup = 0;

  logic clk = 0, rst_n = 0;
  logic a_we = 0, key_we = 0, start = 0;
  logic [RW-1:0] a_addr = '0;
  logic [W-1:0] a_wdata = '0, key = '0;
  logic busy, done, valid;
  logic [N-1:0][N-1:0] t;
  logic [N-1:0][RW-1:0] rank;
  logic [RW-1:0] min_idx, max_idx, sel_idx, srch_idx;
  logic sel_found, ge, srch_found;
  logic [N-1:0] srch_hit;

  always #5 clk = ~clk;

  xpa_top #(.N(N), .W(W)) dut (
    .clk, .rst_n, .a_we_i(a_we), .a_addr_i(a_addr), .a_wdata_i(a_wdata),
    .key_we_i(key_we), .key_i(key), .start_i(start),
    .busy_o(busy), .done_o(done), .valid_o(valid),
    .q_rank_i('0), .q_elem_i('0), .q_j_i('0),
    .t_o(t), .rank_o(rank), .min_idx_o(min_idx), .max_idx_o(max_idx),
    .sel_idx_o(sel_idx), .sel_found_o(sel_found), .ge_o(ge), .ge_est_o(),
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

  // count compare cycles in which both PEs of class 2 that neighbour a
  // class-1 PE request T[2][1]: in the line 0 1 2 3 0 2 1 3 these are
  // position 2 (class 1 on its left) and position 5 (class 1 on its right)
  always @(posedge clk)
    if (dut.cmp && dut.u_array.set_l[2] && dut.u_array.set_r[5]) n_dup++;

  task automatic sort(input int v [N]);
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      a_we = 1; a_addr = RW'(i); a_wdata = W'(v[i]);
    end
    @(negedge clk);
    a_we = 0; start = 1;
    @(negedge clk);
    start = 0;
    wait (done);
    @(negedge clk);
  endtask

  initial begin
    int ex [N] = '{6, 7, 8, 5};
    logic [3:0] ex_t [N] = '{4'b0001, 4'b1001, 4'b1101, 4'b0000};  // T[i][0..3]
    int ex_r [N] = '{1, 2, 3, 0};
    int v [N];
    repeat (3) @(posedge clk);
    rst_n = 1;
    sort(ex);
    for (int i = 0; i < N; i++) begin
      for (int k = 0; k < N; k++)
        chk(t[i][k] == ex_t[i][N-1-k], $sformatf("example T[%0d][%0d]", i, k));
      chk(rank[i] == RW'(ex_r[i]), $sformatf("example rank %0d", i));
    end
    chk(min_idx == 2'd3 && max_idx == 2'd2, "example min/max");
    for (int it = 0; it < 200; it++) begin
      for (int i = 0; i < N; i++) v[i] = $urandom % 4;
      sort(v);
      for (int i = 0; i < N; i++) begin
        int r;
        r = 0;
        for (int k = 0; k < N; k++) begin
          bit e;
          e = (k != i) && ((v[k] < v[i]) || (v[k] == v[i] && k < i));
          chk(t[i][k] == e, $sformatf("it %0d T[%0d][%0d]", it, i, k));
          if (e) r++;
        end
        chk(rank[i] == RW'(r), $sformatf("it %0d rank %0d", it, i));
      end
    end
    $display("cycles with two writes of T[2][1]: %0d", n_dup);
    chk(n_dup > 0, "duplicate adjacency exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
