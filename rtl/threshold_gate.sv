// threshold_gate -- TH-G, a threshold gate with unit weights.
//
// y_o = 1 exactly when at least THR of the N inputs are 1. The rank circuit
// treats such a gate as a single O(1)-delay element; in CMOS it is built here
// as a population count and a compare, which synthesises to an adder tree.
// Combinational.
// Unit weights and the thresholds M and M+1 follow the paper's rank circuit;
// the popcount realisation is this design's choice.
module threshold_gate #(
  parameter int N   = 5,
  parameter int THR = 1
) (
  input  logic [N-1:0] x_i,
  output logic         y_o
);

  localparam int CW = $clog2(N + 2);

  logic [CW-1:0] sum;

  always_comb begin
    sum = '0;
    for (int s = 0; s < N; s++) sum = sum + CW'(x_i[s]);
    y_o = (int'(sum) >= THR);
  end

endmodule
