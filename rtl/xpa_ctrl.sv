// xpa_ctrl -- sequences one sort/search operation.
//
// The operation follows the three parallel loops of the sorting algorithm:
//   PH_LOAD  one cycle: every PE loads its element from the load bus and
//            every row of T (and the search vector) is master-cleared;
//   PH_CMP   one cycle: the crosspoints close, neighbours compare and the
//            results are written into T;
//   PH_DONE  one cycle: done_o pulses. The rank, min/max, query and search
//            outputs are combinational from T and stay valid (valid_o) until
//            the next start.
// start_i is sampled in PH_IDLE and PH_DONE; a start while the array is busy
// is ignored. Latency from the start edge to done_o is 3 cycles for every N.
// The three steps follow the loops of the sorting algorithm; the paper gives
// no clocking, so one cycle per step, the start/busy/done/valid handshake and
// the reset are this design's choices.
module xpa_ctrl
  import xpa_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start_i,
  output logic   load_o,   // load PEs
  output logic   clr_o,    // master clear of T and search vector
  output logic   cmp_o,    // crosspoints on, T write enable
  output logic   busy_o,
  output logic   done_o,
  output logic   valid_o,
  output phase_e phase_o
);

  phase_e ph_q, ph_d;
  logic   valid_q;

  always_comb begin
    ph_d = ph_q;
    unique case (ph_q)
      PH_IDLE: if (start_i) ph_d = PH_LOAD;
      PH_LOAD: ph_d = PH_CMP;
      PH_CMP:  ph_d = PH_DONE;
      PH_DONE: ph_d = start_i ? PH_LOAD : PH_IDLE;
      default: ph_d = PH_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph_q    <= PH_IDLE;
      valid_q <= 1'b0;
    end else begin
      ph_q <= ph_d;
      if (ph_d == PH_LOAD)      valid_q <= 1'b0;
      else if (ph_d == PH_DONE) valid_q <= 1'b1;
    end
  end

  assign load_o  = (ph_q == PH_LOAD);
  assign clr_o   = (ph_q == PH_LOAD);
  assign cmp_o   = (ph_q == PH_CMP);
  assign busy_o  = (ph_q == PH_LOAD) || (ph_q == PH_CMP);
  assign done_o  = (ph_q == PH_DONE);
  assign valid_o = valid_q;
  assign phase_o = ph_q;

  // T is written only in the compare phase, never while it is being cleared.
  always_ff @(posedge clk) assert (!(clr_o && cmp_o));

endmodule
