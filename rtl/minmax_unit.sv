// minmax_unit -- index of the minimum and of the maximum element.
//
// The row of T that belongs to the minimum holds no 1, so an N-input NOR per
// row marks it. The row of the maximum holds a 1 everywhere except on the
// diagonal, so an N-input AND per row, with the diagonal input inverted,
// marks it. Each set of N row flags feeds an N x lg N encoder. Both results
// are combinational from T and need a constant number of gate levels with
// unbounded fan-in.
// The NOR and AND-with-inverted-diagonal gates and the encoders follow the
// paper's min/max circuit; nothing here is a design choice beyond the encoder
// behaviour described in onehot_encoder.
module minmax_unit
  import xpa_pkg::*;
#(
  parameter int N  = 5,
  parameter int RW = idx_bits(N)
) (
  input  logic [N-1:0][N-1:0] t_i,
  output logic [N-1:0]        min_hot_o,
  output logic [N-1:0]        max_hot_o,
  output logic [RW-1:0]       min_idx_o,
  output logic [RW-1:0]       max_idx_o
);

  always_comb
    for (int i = 0; i < N; i++) begin
      logic [N-1:0] row;
      row          = t_i[i];
      min_hot_o[i] = ~|row;
      row[i]       = ~row[i];
      max_hot_o[i] = &row;
    end

  onehot_encoder #(.N(N), .OW(RW)) u_enc_min (.d_i(min_hot_o), .k_o(min_idx_o), .any_o());
  onehot_encoder #(.N(N), .OW(RW)) u_enc_max (.d_i(max_hot_o), .k_o(max_idx_o), .any_o());

endmodule
