// crosspoint_switch -- the on/off switch that joins two adjacent PEs.
//
// The array places one crosspoint between every pair of neighbouring PEs and
// no other wiring between PEs. Through it the PE of the higher class passes
// its element to the PE of the lower class, and the lower-class PE passes its
// one-bit comparison result back. Which side is higher is fixed by the layout
// and given as HI_ON_LEFT. When on_i is low the switch is open: both PEs see
// zero, so no element or result crosses.
//
// Purely combinational. The paper describes the crosspoint only as an on/off
// switch; modelling it as a gated, direction-fixed word path plus a return
// bit is this design's choice.
// Since the direction is a parameter, the outputs of the direction not used
// (for HI_ON_LEFT = 0: r_dat_o and l_sig_o) are constant 0 by construction.
module crosspoint_switch #(
  parameter int W          = 8,
  parameter bit HI_ON_LEFT = 1'b0  // 1: left PE has the higher class
) (
  input  logic         on_i,
  // left PE's right-side port
  input  logic [W-1:0] l_dat_i,
  output logic [W-1:0] l_dat_o,
  input  logic         l_sig_i,
  output logic         l_sig_o,
  // right PE's left-side port
  input  logic [W-1:0] r_dat_i,
  output logic [W-1:0] r_dat_o,
  input  logic         r_sig_i,
  output logic         r_sig_o
);

  always_comb begin
    l_dat_o = '0;
    r_dat_o = '0;
    l_sig_o = 1'b0;
    r_sig_o = 1'b0;
    if (on_i) begin
      if (HI_ON_LEFT) begin
        r_dat_o = l_dat_i;   // element: left (higher) -> right (lower)
        l_sig_o = r_sig_i;   // result:  right -> left
      end else begin
        l_dat_o = r_dat_i;   // element: right (higher) -> left (lower)
        r_sig_o = l_sig_i;   // result:  left -> right
      end
    end
  end

endmodule
