// xpa_pe -- one processing element (PE) of the 1D-Crosspoint Array.
//
// A PE is a replicate of class CLS: it holds the element A[CLS] and meets at
// most two other classes, CLS_L on its left and CLS_R on its right, through
// one crosspoint each. For each side the rule of the sorting algorithm is
// applied independently:
//   * neighbour class < CLS: this PE sends its element to the neighbour and
//     receives one result bit back; a 1 means the neighbour found its own
//     element to be the smaller one, so this PE sets T[CLS][neighbour].
//   * neighbour class > CLS: this PE receives the neighbour's element and
//     compares. If the received element is smaller (or equal with the smaller
//     class number, which never holds on this branch) it sets
//     T[CLS][neighbour] and returns 0, otherwise it returns 1 so that the
//     neighbour sets its own bit.
// Equal elements thus rank the higher class number above the lower one, so
// the ranks always form a permutation of 0..n-1.
//
// The PE also compares its element with a broadcast search key (match_o); the
// array uses this output only from replicate 0 of each class.
//
// Interface and timing: load_i latches elem_i into the element register at
// the clock edge (the only state in the PE). Everything else is
// combinational: set_l_o/set_r_o are the T-matrix write requests, valid while
// cmp_en_i is high; the array writes them into T at the end of that cycle.
// The compare-and-exchange rules are the paper's; the register, the enable
// and the search comparator are this design's way of realising them.
// The defaults describe PE C_{1,0} of the N = 5 line (classes 0 and 2 on its
// sides). Because the direction of each link is fixed by the classes, the
// outputs of the unused direction on each side (here l_sig_o and r_dat_o) are
// constant 0 by construction.
module xpa_pe #(
  parameter int W     = 8,   // element width
  parameter int CLS   = 1,   // own class
  parameter int CLS_L = 0,   // class of left neighbour, -1 = none
  parameter int CLS_R = 2    // class of right neighbour, -1 = none
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load_i,
  input  logic [W-1:0] elem_i,    // A[CLS] from the load bus
  input  logic         cmp_en_i,
  input  logic [W-1:0] key_i,
  // left side link
  output logic [W-1:0] l_dat_o,   // own element, to a lower-class neighbour
  input  logic [W-1:0] l_dat_i,   // neighbour element, from a higher class
  output logic         l_sig_o,   // result bit to a higher-class neighbour
  input  logic         l_sig_i,   // result bit from a lower-class neighbour
  // right side link
  output logic [W-1:0] r_dat_o,
  input  logic [W-1:0] r_dat_i,
  output logic         r_sig_o,
  input  logic         r_sig_i,
  // results
  output logic         set_l_o,   // set T[CLS][CLS_L]
  output logic         set_r_o,   // set T[CLS][CLS_R]
  output logic         match_o    // element == key
);

  logic [W-1:0] elem_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      elem_q <= '0;
    else if (load_i) elem_q <= elem_i;
  end

  assign match_o = (elem_q == key_i);

  // One side of the compare-and-exchange. nb = neighbour class.
  function automatic logic [1:0] side(input int nb, input logic [W-1:0] own,
                                      input logic [W-1:0] nb_dat,
                                      input logic nb_sig);
    // returns {set_T, sig_out}
    if (nb < 0)   return 2'b00;
    if (nb < CLS) return {nb_sig, 1'b0};          // sender: wait for the bit
    if ((nb_dat < own) || ((nb_dat == own) && (nb < CLS)))
      return 2'b10;                                // T[CLS][nb] <- 1, send 0
    return 2'b01;                                  // send 1
  endfunction

  logic [1:0] l_res, r_res;

  always_comb begin
    l_res   = side(CLS_L, elem_q, l_dat_i, l_sig_i);
    r_res   = side(CLS_R, elem_q, r_dat_i, r_sig_i);
    l_dat_o = (CLS_L >= 0 && CLS_L < CLS) ? elem_q : '0;
    r_dat_o = (CLS_R >= 0 && CLS_R < CLS) ? elem_q : '0;
    l_sig_o = l_res[0];
    r_sig_o = r_res[0];
    set_l_o = cmp_en_i & l_res[1];
    set_r_o = cmp_en_i & r_res[1];
  end

endmodule
