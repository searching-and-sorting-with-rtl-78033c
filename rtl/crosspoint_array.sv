// crosspoint_array -- the 1D-Crosspoint Array: a line of P PEs joined by
// P-1 crosspoints, laid out by xpa_pkg::pe_class().
//
// For odd N there are P = N(N-1)/2+1 PEs and every pair of classes shares
// exactly one crosspoint, so one compare phase compares every element with
// every other element once and every cell of T has at most one writer. For
// even N (P = N^2/2) N/2-1 pairs meet twice; both PEs then set the same cell
// with the same value and the requests are simply ORed.
//
// Load distribution: lane i of the load bus (bus_i[i] = A[i]) is fanned out
// to every replicate of class i, so all replicates hold the same element.
// Search: the match output of replicate 0 of class i (PE C_{i,0}) forms
// match_o[i].
//
// Timing: load_i loads all PEs at the clock edge. While cmp_en_i is high the
// crosspoints are closed and set_o (set_o[i][k] = "set T[i][k]") is a purely
// combinational function of the loaded elements: one comparison and one
// returned bit, independent of N.
// The layout and the pairing of classes follow the paper's construction; the
// direct per-class wiring of the load bus, the OR-merge of duplicate
// requests for even N and the exclusive-write assertion are this design's.
// The diagonal of set_o (no class compares with itself) is constant 0.
module crosspoint_array
  import xpa_pkg::*;
#(
  parameter int N = 5,  // number of classes (elements)
  parameter int W = 8   // element width
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load_i,
  input  logic                    cmp_en_i,
  input  logic [N-1:0][W-1:0]     bus_i,   // load bus, lane i = A[i]
  input  logic [W-1:0]            key_i,   // search key
  output logic [N-1:0][N-1:0]     set_o,   // T write requests
  output logic [N-1:0]            match_o  // A[i] == key
);

  localparam int P = num_pes(N);

  logic [W-1:0] l_dat_o [P], l_dat_i [P], r_dat_o [P], r_dat_i [P];
  logic         l_sig_o [P], l_sig_i [P], r_sig_o [P], r_sig_i [P];
  logic         set_l [P], set_r [P], pe_match [P];

  // OR chain of write requests; acc[p] holds those of PEs 0..p-1.
  logic [N*N-1:0] acc [P+1];
  logic [N*N-1:0] mask_acc [P+1];
  assign acc[0]      = '0;
  assign mask_acc[0] = '0;

  for (genvar p = 0; p < P; p++) begin : g_pe
    localparam int C  = pe_class(N, p);
    localparam int CL = (p > 0)     ? pe_class(N, p - 1) : -1;
    localparam int CR = (p < P - 1) ? pe_class(N, p + 1) : -1;
    localparam int RP = pe_replicate(N, p);

    xpa_pe #(.W(W), .CLS(C), .CLS_L(CL), .CLS_R(CR)) u_pe (
      .clk     (clk),
      .rst_n   (rst_n),
      .load_i  (load_i),
      .elem_i  (bus_i[C]),
      .cmp_en_i(cmp_en_i),
      .key_i   (key_i),
      .l_dat_o (l_dat_o[p]),
      .l_dat_i (l_dat_i[p]),
      .l_sig_o (l_sig_o[p]),
      .l_sig_i (l_sig_i[p]),
      .r_dat_o (r_dat_o[p]),
      .r_dat_i (r_dat_i[p]),
      .r_sig_o (r_sig_o[p]),
      .r_sig_i (r_sig_i[p]),
      .set_l_o (set_l[p]),
      .set_r_o (set_r[p]),
      .match_o (pe_match[p])
    );

    // cells of T this PE may write, and what it requests now
    logic [N*N-1:0] mask, req;
    always_comb begin
      mask = '0;
      req  = '0;
      if (CL >= 0) begin
        mask[C*N + ((CL >= 0) ? CL : 0)] = 1'b1;
        req [C*N + ((CL >= 0) ? CL : 0)] = set_l[p];
      end
      if (CR >= 0) begin
        mask[C*N + ((CR >= 0) ? CR : 0)] = 1'b1;
        req [C*N + ((CR >= 0) ? CR : 0)] = set_r[p];
      end
    end
    assign acc[p+1] = acc[p] | req;

    if (RP == 0) begin : g_rep0
      assign match_o[C] = pe_match[p];
    end

    // The ends of the line have no neighbour on the outer side.
    if (p == 0) begin : g_left_end
      assign l_dat_i[p] = '0;
      assign l_sig_i[p] = 1'b0;
    end
    if (p == P - 1) begin : g_right_end
      assign r_dat_i[p] = '0;
      assign r_sig_i[p] = 1'b0;
    end

    // Crosspoint between PE p and PE p+1.
    if (p < P - 1) begin : g_xp
      crosspoint_switch #(.W(W), .HI_ON_LEFT(C > CR)) u_xp (
        .on_i    (cmp_en_i),
        .l_dat_i (r_dat_o[p]),
        .l_dat_o (r_dat_i[p]),
        .l_sig_i (r_sig_o[p]),
        .l_sig_o (r_sig_i[p]),
        .r_dat_i (l_dat_o[p+1]),
        .r_dat_o (l_dat_i[p+1]),
        .r_sig_i (l_sig_o[p+1]),
        .r_sig_o (l_sig_i[p+1])
      );
    end

    // Odd N: no two PEs may ever target the same cell of T (no concurrent
    // write is needed). mask_acc[p] holds the cells of PEs 0..p-1.
    assign mask_acc[p+1] = mask_acc[p] | mask;
    if (N % 2 == 1) begin : g_excl
      always_ff @(posedge clk)
        if (rst_n && cmp_en_i)
          assert ((mask_acc[p] & mask) == '0)
            else $error("two PEs write the same T cell");
    end
  end

  always_comb
    for (int i = 0; i < N; i++)
      for (int k = 0; k < N; k++)
        set_o[i][k] = acc[P][i*N + k];

endmodule
