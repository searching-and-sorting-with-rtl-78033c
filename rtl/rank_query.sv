// rank_query -- queries answered from the ranks.
//
// Select by rank: every row subtracts the query rank q_rank_i from its own
// rank; the row whose difference is zero holds the element of that rank
// (0 = smallest). The N zero flags (the inverted differences ORed) go to an
// N x lg N encoder, giving sel_idx_o. Since ranks form a permutation exactly
// one row answers whenever q_rank_i < N; sel_found_o tells.
//
// Rank test: ge_o = 1 when element q_elem_i has rank q_j_i or higher. It is
// computed exactly, by comparing that element's binary rank with q_j_i.
// Combinational.
// Select by rank (subtract, zero-detect, encode) follows the paper, applied to
// the binary ranks. The paper notes that a rank can always be tested
// exactly from the row sum, which is what ge_o does; its cheaper grouped
// test, right only with high probability, is rank_ge_est. The paper calls the
// selected element the "i-th largest" but defines it by a row sum of i; the
// row-sum definition is the one implemented.
module rank_query
  import xpa_pkg::*;
#(
  parameter int N  = 5,
  parameter int RW = idx_bits(N)
) (
  input  logic [N-1:0][RW-1:0] rank_i,
  input  logic [RW-1:0]        q_rank_i,
  input  logic [RW-1:0]        q_elem_i,
  input  logic [RW:0]          q_j_i,
  output logic [RW-1:0]        sel_idx_o,
  output logic                 sel_found_o,
  output logic                 ge_o
);

  logic [N-1:0] hit;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic [RW-1:0] diff;
      diff   = rank_i[i] - q_rank_i;
      hit[i] = ~|diff;
    end
    ge_o = 1'b0;
    for (int i = 0; i < N; i++)
      if (RW'(i) == q_elem_i) ge_o = ({1'b0, rank_i[i]} >= q_j_i);
  end

  onehot_encoder #(.N(N), .OW(RW)) u_enc (.d_i(hit), .k_o(sel_idx_o), .any_o(sel_found_o));

endmodule
