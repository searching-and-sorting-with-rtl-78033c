// t_matrix -- the N x N comparison-result matrix T.
//
// After a compare phase T[i][k] = 1 exactly when A[k] < A[i] (ties broken by
// class number), so row i holds the rank of A[i] as a string of ones. Row i
// belongs to class i: only PEs of class i write it, so rows never contend.
//
// clr_i is the master clear that C_{i,0} issues to all flip-flops of its row
// (one bit per row); set_i[i][k] sets T[i][k] when we_i is high. Set has
// priority below clear. The diagonal is never written and stays 0.
// Registered: writes take effect at the clock edge.
// Row ownership and the per-row master clear follow the paper; the priority of
// clear over set and the reset are this design's choices.
module t_matrix #(
  parameter int N = 5
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        clr_i,  // master clear, one per row
  input  logic                we_i,
  input  logic [N-1:0][N-1:0] set_i,
  output logic [N-1:0][N-1:0] t_o
);

  logic [N-1:0][N-1:0] t_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) t_q <= '0;
    else
      for (int i = 0; i < N; i++)
        if (clr_i[i])  t_q[i] <= '0;
        else if (we_i) t_q[i] <= t_q[i] | set_i[i];
  end

  assign t_o = t_q;

  // The diagonal compares an element with itself and is never set.
  always_ff @(posedge clk)
    if (rst_n && we_i)
      for (int i = 0; i < N; i++)
        assert (!set_i[i][i]) else $error("T[%0d][%0d] set", i, i);

endmodule
