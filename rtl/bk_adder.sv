// bk_adder -- Brent-Kung parallel-prefix adder, WID-bit operands.
//
// Generate/propagate pairs are combined in an up-sweep tree (spans 1, 2,
// 4, ...) and the missing carries are filled in by a down-sweep, giving all
// carries in about 2 lg WID levels of constant fan-in gates. sum_o has one
// more bit than the operands (the carry out). Combinational.
// The paper names this adder for its bounded-fan-in rank path; the prefix
// network is the textbook Brent-Kung structure.
module bk_adder #(
  parameter int WID = 4
) (
  input  logic [WID-1:0] a_i,
  input  logic [WID-1:0] b_i,
  output logic [WID:0]   sum_o
);

  logic [WID-1:0] p, g, gp, pp;

  always_comb begin
    p  = a_i ^ b_i;
    g  = a_i & b_i;
    gp = g;
    pp = p;
    // up-sweep
    for (int d = 1; d < WID; d = d * 2)
      for (int i = 2 * d - 1; i < WID; i = i + 2 * d) begin
        gp[i] = gp[i] | (pp[i] & gp[i-d]);
        pp[i] = pp[i] & pp[i-d];
      end
    // down-sweep
    for (int d = 1 << ($clog2(WID + 1) - 1); d >= 1; d = d / 2)
      for (int i = 3 * d - 1; i < WID; i = i + 2 * d) begin
        gp[i] = gp[i] | (pp[i] & gp[i-d]);
        pp[i] = pp[i] & pp[i-d];
      end
    // gp[i] is now the carry out of bit i
    sum_o[0] = p[0];
    for (int i = 1; i < WID; i++) sum_o[i] = p[i] ^ gp[i-1];
    sum_o[WID] = gp[WID-1];
  end

endmodule
