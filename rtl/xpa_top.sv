// xpa_top -- sorter and searcher built on a 1D-Crosspoint Array.
//
// N elements of W bits are written into a_memory by the host. A start pulse
// runs one operation (xpa_ctrl): every PE of the crosspoint_array loads the
// element of its class, T is cleared, all N(N-1)/2 pairs of elements are
// compared at once across the crosspoints and T is written. From then on,
// until the next start, the following are valid (valid_o) and combinational
// from T:
//   t_o         the comparison matrix, T[i][k] = 1 iff A[k] ranks below A[i]
//   rank_o      rank of every element (threshold-gate rank_unit, or
//               adder trees when RANK_TREE = 1)
//   min_idx_o / max_idx_o   index of the smallest / largest element
//   sel_idx_o   index of the element whose rank is q_rank_i
//   ge_o        element q_elem_i has rank >= q_j_i (exact)
//   ge_est_o    the same test by groups of EST_K bits of T: a 1 is always
//               right, a 0 is right with high probability (rank_ge_est)
//   srch_idx_o / srch_found_o / srch_hit_o   where the key held in
//               a_memory occurs
// Equal elements are ordered by index (the higher index ranks higher).
// Latency: done_o 3 cycles after the start edge, independent of N.
// The array, T, rank converter, min/max circuit, rank selection, both rank
// tests and search follow the paper. The host interface, the controller
// handshake, W = 8 and the choice of rank path by parameter are this design's.
module xpa_top
  import xpa_pkg::*;
#(
  parameter int N  = 5,
  parameter int W  = 8,
  parameter int RW = idx_bits(N),
  // rank path: 0 = threshold-gate 1's counters (constant depth, default),
  //            1 = binary trees of Brent-Kung adders (bounded fan-in)
  parameter bit RANK_TREE = 1'b0,
  // group size of the probabilistic rank test (ge_est_o)
  parameter int EST_K = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host write port of the element memory
  input  logic                 a_we_i,
  input  logic [RW-1:0]        a_addr_i,
  input  logic [W-1:0]         a_wdata_i,
  input  logic                 key_we_i,
  input  logic [W-1:0]         key_i,
  // operation control
  input  logic                 start_i,
  output logic                 busy_o,
  output logic                 done_o,
  output logic                 valid_o,
  // queries
  input  logic [RW-1:0]        q_rank_i,
  input  logic [RW-1:0]        q_elem_i,
  input  logic [RW:0]          q_j_i,
  // results
  output logic [N-1:0][N-1:0]  t_o,
  output logic [N-1:0][RW-1:0] rank_o,
  output logic [RW-1:0]        min_idx_o,
  output logic [RW-1:0]        max_idx_o,
  output logic [RW-1:0]        sel_idx_o,
  output logic                 sel_found_o,
  output logic                 ge_o,
  output logic                 ge_est_o,
  output logic [RW-1:0]        srch_idx_o,
  output logic                 srch_found_o,
  output logic [N-1:0]         srch_hit_o
);

  logic                load, clr, cmp;
  phase_e              phase;
  logic [N-1:0][W-1:0] bus;
  logic [W-1:0]        key;
  logic [N-1:0][N-1:0] set_req;
  logic [N-1:0]        match, min_hot, max_hot;

  xpa_ctrl u_ctrl (
    .clk(clk), .rst_n(rst_n), .start_i(start_i),
    .load_o(load), .clr_o(clr), .cmp_o(cmp),
    .busy_o(busy_o), .done_o(done_o), .valid_o(valid_o), .phase_o(phase)
  );

  a_memory #(.N(N), .W(W), .RW(RW)) u_mem (
    .clk(clk), .rst_n(rst_n),
    .we_i(a_we_i), .addr_i(a_addr_i), .wdata_i(a_wdata_i),
    .key_we_i(key_we_i), .key_i(key_i),
    .bus_o(bus), .key_o(key)
  );

  crosspoint_array #(.N(N), .W(W)) u_array (
    .clk(clk), .rst_n(rst_n),
    .load_i(load), .cmp_en_i(cmp),
    .bus_i(bus), .key_i(key),
    .set_o(set_req), .match_o(match)
  );

  t_matrix #(.N(N)) u_t (
    .clk(clk), .rst_n(rst_n),
    .clr_i({N{clr}}), .we_i(cmp), .set_i(set_req), .t_o(t_o)
  );

  if (RANK_TREE) begin : g_rank_tree
    for (genvar i = 0; i < N; i++) begin : g_row
      rank_adder_tree #(.N(N), .RW(RW)) u_tree (.t_row_i(t_o[i]), .rank_o(rank_o[i]));
    end
  end else begin : g_rank_th
    rank_unit #(.N(N), .RW(RW)) u_rank (.t_i(t_o), .rank_o(rank_o));
  end

  minmax_unit #(.N(N), .RW(RW)) u_minmax (
    .t_i(t_o), .min_hot_o(min_hot), .max_hot_o(max_hot),
    .min_idx_o(min_idx_o), .max_idx_o(max_idx_o)
  );

  rank_query #(.N(N), .RW(RW)) u_query (
    .rank_i(rank_o), .q_rank_i(q_rank_i), .q_elem_i(q_elem_i), .q_j_i(q_j_i),
    .sel_idx_o(sel_idx_o), .sel_found_o(sel_found_o), .ge_o(ge_o)
  );

  rank_ge_est #(.N(N), .K(EST_K), .RW(RW)) u_est (
    .t_i(t_o), .q_elem_i(q_elem_i), .q_j_i(q_j_i), .row_ge_o(), .est_o(ge_est_o)
  );

  search_unit #(.N(N), .RW(RW)) u_search (
    .clk(clk), .rst_n(rst_n), .clr_i(clr), .we_i(cmp),
    .match_i(match), .hit_o(srch_hit_o), .idx_o(srch_idx_o), .found_o(srch_found_o)
  );

  // Once T is complete exactly one row is the minimum and one the maximum.
  always_ff @(posedge clk)
    if (rst_n && phase == PH_DONE) begin
      assert ($onehot(min_hot)) else $error("min row not unique");
      assert ($onehot(max_hot)) else $error("max row not unique");
    end

endmodule
