// rank_adder_tree -- rank of one element by adding up its row of T in a
// binary tree of Brent-Kung adders (the bounded-fan-in alternative to the
// threshold-gate 1's counter).
//
// The N row bits are the leaves of a complete binary tree with NP leaves
// (NP = N rounded up to a power of two, the extra leaves tied to 0). Every
// inner node is a bk_adder on RW-bit operands, RW = lg N: a row holds at
// most N-1 ones, so no partial sum overflows and each adder's carry out is
// 0. Depth: lg N adders of O(lg lg N) levels each. Combinational.
// The paper proposes this tree of Brent-Kung adders; the padding to a power
// of two and the heap ordering of the nodes are this design's choices.
module rank_adder_tree
  import xpa_pkg::*;
#(
  parameter int N  = 5,
  parameter int RW = idx_bits(N)
) (
  input  logic [N-1:0]  t_row_i,
  output logic [RW-1:0] rank_o
);

  localparam int NP = 1 << idx_bits(N);

  // node k has children 2k+1 and 2k+2; leaves are nodes NP-1 .. 2NP-2
  logic [RW-1:0] node [2*NP-1];

  for (genvar l = 0; l < NP; l++) begin : g_leaf
    if (l < N) begin : g_in
      assign node[NP-1+l] = RW'(t_row_i[l]);
    end else begin : g_pad
      assign node[NP-1+l] = '0;
    end
  end

  for (genvar k = 0; k < NP - 1; k++) begin : g_add
    logic [RW:0] s;
    bk_adder #(.WID(RW)) u_add (.a_i(node[2*k+1]), .b_i(node[2*k+2]), .sum_o(s));
    assign node[k] = s[RW-1:0];
    // a row of T holds at most N-1 ones (its diagonal is 0), so no partial
    // sum reaches 2^RW; only an all-ones input, impossible in T, could
    always_comb assert (s[RW] == 1'b0 || &t_row_i);
  end

  assign rank_o = node[0];

endmodule
