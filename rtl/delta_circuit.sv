// delta_circuit -- Delta(m), the "number of ones = M" detector.
//
// Two unit-weight threshold gates look at the same N inputs: the upper one
// fires when at least M+1 inputs are 1 and is inverted, the lower one fires
// when at least M inputs are 1. An AND gate combines them, so q_o = 1 exactly
// when M inputs are 1. Combinational, a depth of three gates whatever N is.
// This is the circuit of the paper's rank converter.
module delta_circuit #(
  parameter int N = 5,
  parameter int M = 0
) (
  input  logic [N-1:0] x_i,
  output logic         q_o
);

  logic y, z;

  threshold_gate #(.N(N), .THR(M + 1)) u_upper (.x_i(x_i), .y_o(y));
  threshold_gate #(.N(N), .THR(M))     u_lower (.x_i(x_i), .y_o(z));

  assign q_o = ~y & z;

endmodule
