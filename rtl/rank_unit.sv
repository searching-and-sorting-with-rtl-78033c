// rank_unit -- the string-of-ones to rank converter.
//
// Row i of T holds one 1 for every element smaller than A[i]. Each row goes
// through a ones_counter (threshold-gate Delta circuits, one-hot result) and
// an N x lg N encoder, giving the binary rank of A[i] (0 = smallest). All N
// rows are converted in parallel; the whole path is combinational with a
// depth that does not grow with N when a threshold gate counts as one gate.
// The per-row counter-plus-encoder structure follows the paper's rank
// converter.
module rank_unit
  import xpa_pkg::*;
#(
  parameter int N  = 5,
  parameter int RW = idx_bits(N)
) (
  input  logic [N-1:0][N-1:0] t_i,
  output logic [N-1:0][RW-1:0] rank_o
);

  for (genvar i = 0; i < N; i++) begin : g_row
    logic [N-1:0] e;
    ones_counter #(.N(N)) u_cnt (.t_row_i(t_i[i]), .e_o(e));
    onehot_encoder #(.N(N), .OW(RW)) u_enc (.d_i(e), .k_o(rank_o[i]), .any_o());
  end

endmodule
