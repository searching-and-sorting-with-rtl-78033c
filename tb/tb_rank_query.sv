// tb_rank_query -- rank queries for N = 7 (3-bit ranks): for random rank
// permutations every query rank selects the element holding it, ranks 7 (out
// of range) find nothing, and the rank test ge_o is checked for every
// element and every j from 0 to 8.
module tb_rank_query;

  localparam int N = 7;
  int checks = 0, failures = 0;
  logic [N-1:0][2:0] rank;
  logic [2:0] q_rank, q_elem, sel;
  logic [3:0] q_j;
  logic found, ge;

  rank_query #(.N(N)) dut (.rank_i(rank), .q_rank_i(q_rank), .q_elem_i(q_elem), .q_j_i(q_j),
    .sel_idx_o(sel), .sel_found_o(found), .ge_o(ge));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int perm [N];
    q_elem = '0; q_j = '0;
    for (int it = 0; it < 100; it++) begin
      for (int i = 0; i < N; i++) perm[i] = i;
      for (int i = N - 1; i > 0; i--) begin
        int j, t;
        j = $urandom % (i + 1);
        t = perm[i]; perm[i] = perm[j]; perm[j] = t;
      end
      for (int i = 0; i < N; i++) rank[i] = 3'(perm[i]);
      for (int r = 0; r < 8; r++) begin
        q_rank = 3'(r);
        #1;
        if (r < N) begin
          int who;
          who = 0;
          for (int i = 0; i < N; i++) if (perm[i] == r) who = i;
          chk(found && sel == 3'(who), $sformatf("select rank %0d", r));
        end else
          chk(!found, "rank 7 absent");
      end
      for (int e = 0; e < N; e++)
        for (int j = 0; j <= 8; j++) begin
          q_elem = 3'(e);
          q_j = 4'(j);
          #1;
          chk(ge == (perm[e] >= j), $sformatf("ge e=%0d j=%0d", e, j));
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
