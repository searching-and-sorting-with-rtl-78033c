// tb_rank_ge_est -- the grouped rank >= j test at N = 9 with groups of K = 2
// and K = 3, on T matrices built from random lists with repeats. The
// reference sums the groups by a different route (bit b belongs to group
// b / K). It also checks the properties the test is meant to have: a "yes"
// always means rank >= j, and for j <= 1 the answer is exact. False "no"
// answers must occur at some point (the test is only probable), and so must
// true "yes" answers.
module tb_rank_ge_est;

  localparam int N = 9;
  localparam int RW = 4;

  int checks = 0, failures = 0;
  int n_false_no = 0, n_yes = 0;

  logic [N-1:0][N-1:0] t;
  logic [RW-1:0] q_elem;
  logic [RW:0] q_j;
  logic [N-1:0] row2, row3;
  logic est2, est3;

  rank_ge_est #(.N(N), .K(2)) u_k2 (.t_i(t), .q_elem_i(q_elem), .q_j_i(q_j), .row_ge_o(row2), .est_o(est2));
  rank_ge_est #(.N(N), .K(3)) u_k3 (.t_i(t), .q_elem_i(q_elem), .q_j_i(q_j), .row_ge_o(row3), .est_o(est3));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit model(input logic [N-1:0] row, input int k, input int j);
    int cnt [N];
    foreach (cnt[g]) cnt[g] = 0;
    for (int b = 0; b < N; b++) cnt[b / k] += row[b];
    foreach (cnt[g]) if (cnt[g] >= j) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    int a [N];
    for (int it = 0; it < 600; it++) begin
      for (int i = 0; i < N; i++) a[i] = $urandom % ((it % 3 == 0) ? 4 : 64);
      for (int i = 0; i < N; i++)
        for (int k = 0; k < N; k++)
          t[i][k] = (i != k) && ((a[k] < a[i]) || (a[k] == a[i] && k < i));
      q_j = (RW + 1)'($urandom % (N + 1));
      q_elem = RW'($urandom % N);
      #1;
      for (int i = 0; i < N; i++) begin
        int pc;
        pc = $countones(t[i]);
        chk(row2[i] == model(t[i], 2, int'(q_j)), $sformatf("it %0d K=2 row %0d j=%0d", it, i, q_j));
        chk(row3[i] == model(t[i], 3, int'(q_j)), $sformatf("it %0d K=3 row %0d j=%0d", it, i, q_j));
        chk(!row2[i] || pc >= int'(q_j), "K=2 yes implies rank >= j");
        chk(!row3[i] || pc >= int'(q_j), "K=3 yes implies rank >= j");
        if (q_j <= 1) chk(row2[i] == (pc >= int'(q_j)) && row3[i] == (pc >= int'(q_j)), "exact for j <= 1");
        if (row2[i]) n_yes++;
        if (!row2[i] && pc >= int'(q_j)) n_false_no++;
      end
      chk(est2 == row2[q_elem] && est3 == row3[q_elem], $sformatf("it %0d selected row", it));
    end
    $display("yes answers %0d, false no answers %0d (K=2)", n_yes, n_false_no);
    chk(n_yes > 0, "true yes seen");
    chk(n_false_no > 0, "false no seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
