// rank_ge_est -- fast, probabilistic "rank >= j" test on the rows of T.
//
// Each row of T is cut into groups of K neighbouring bits (the last group may
// be shorter). A group whose bits add up to j or more proves that the row
// holds at least j ones, so row_ge_o[i] = OR over the groups of
// (sum of group >= j). The answer is therefore never a false "yes": when it
// is 1 the element's rank is at least j. It can be a false "no" when the ones
// of a row are spread over the groups so that no single group reaches j. For
// j <= 1 the test is exact (it reduces to the OR of the row). For random
// rows the chance of a false "no" shrinks exponentially with N for fixed K and j.
// For K = 2, j = 2 this is N/2 two-input ANDs and one OR gate per row.
//
// Interface: t_i is T; q_elem_i picks the row reported on est_o; q_j_i is j,
// 0 .. N. Combinational, constant depth for a fixed K.
//
// The grouping test and its K = 2 example follow the paper's description of
// rank queries. Evaluating all rows in parallel and selecting one with
// q_elem_i, and sharing j with the exact test, are this design's choices. The
// exact answer is available alongside, from rank_query.
module rank_ge_est
  import xpa_pkg::*;
#(
  parameter int N  = 5,
  parameter int K  = 2,            // bits added together per group
  parameter int RW = idx_bits(N)
) (
  input  logic [N-1:0][N-1:0] t_i,
  input  logic [RW-1:0]       q_elem_i,
  input  logic [RW:0]         q_j_i,
  output logic [N-1:0]        row_ge_o,
  output logic                est_o
);

  localparam int NG = (N + K - 1) / K;   // groups per row

  always_comb begin
    for (int i = 0; i < N; i++) begin
      row_ge_o[i] = 1'b0;
      for (int g = 0; g < NG; g++) begin
        int s;
        s = 0;
        for (int b = g * K; b < g * K + K && b < N; b++) s += int'(t_i[i][b]);
        if (s >= int'(q_j_i)) row_ge_o[i] = 1'b1;
      end
    end
    est_o = 1'b0;
    for (int i = 0; i < N; i++)
      if (RW'(i) == q_elem_i) est_o = row_ge_o[i];
  end

endmodule
