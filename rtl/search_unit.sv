// search_unit -- result vector and encoder of the search query.
//
// For a search every class compares its element with the key once (in PE
// C_{i,0}) and writes one bit into an N x 1 vector instead of a row of T.
// The vector is cleared together with T (clr_i) and written at the end of the
// compare phase (we_i). found_o is the OR of the vector and idx_o its
// encoding: the index of the matching element. If the key occurs more than
// once, idx_o is the OR of their indices; hit_o gives every match.
// The N x 1 vector and encoder follow the paper's search variant; running the
// search in the same operation as the sort, and the handling of repeated keys,
// are this design's choices.
module search_unit
  import xpa_pkg::*;
#(
  parameter int N  = 5,
  parameter int RW = idx_bits(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr_i,
  input  logic          we_i,
  input  logic [N-1:0]  match_i,
  output logic [N-1:0]  hit_o,
  output logic [RW-1:0] idx_o,
  output logic          found_o
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     hit_o <= '0;
    else if (clr_i) hit_o <= '0;
    else if (we_i)  hit_o <= match_i;
  end

  onehot_encoder #(.N(N), .OW(RW)) u_enc (.d_i(hit_o), .k_o(idx_o), .any_o(found_o));

endmodule
