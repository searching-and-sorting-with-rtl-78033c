// ones_counter -- one-hot count of the ones in one row of T.
//
// The N row bits are fanned out to N Delta circuits (the bipartite fan-out
// graph G(N, N^2): every input reaches every circuit). Circuit Delta(m)
// drives e_o[m], which is 1 exactly when the row holds m ones, m = 0..N-1.
// A row of T has a 0 on the diagonal, so exactly one e_o bit is set.
// Combinational, constant depth.
// Structure and names (Delta(m), e_m, G(n, n^2)) follow the paper's 1's
// counter.
module ones_counter #(
  parameter int N = 5
) (
  input  logic [N-1:0] t_row_i,
  output logic [N-1:0] e_o
);

  for (genvar m = 0; m < N; m++) begin : g_delta
    delta_circuit #(.N(N), .M(m)) u_delta (.x_i(t_row_i), .q_o(e_o[m]));
  end

endmodule
