// onehot_encoder -- the N-input, lg N-output encoder.
//
// Output bit b is the OR of every input whose index has bit b set, so a
// one-hot input yields its index. This is the plain OR encoder (one OR gate
// of fan-in about N/2 per output bit): with no input set the index is 0, and
// with several set it is the OR of their indices, so a caller that needs to
// tell these cases apart checks the inputs (see any_o). Combinational.
// The paper specifies an encoder of fan-in-N OR gates; any_o is an addition
// of this design.
// When N is one more than a power of two (N = 5: k_o[2] = d_i[4]) the top
// output bit is a plain wire from one input.
module onehot_encoder
  import xpa_pkg::*;
#(
  parameter int N  = 5,
  parameter int OW = idx_bits(N)
) (
  input  logic [N-1:0]  d_i,
  output logic [OW-1:0] k_o,
  output logic          any_o
);

  always_comb begin
    k_o = '0;
    for (int i = 0; i < N; i++)
      for (int b = 0; b < OW; b++)
        if (((i >> b) & 1) == 1) k_o[b] = k_o[b] | d_i[i];
    any_o = |d_i;
  end

endmodule
