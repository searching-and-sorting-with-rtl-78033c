// a_memory -- the memory that holds the input list A and the search key,
// and drives the backbone load bus.
//
// The host writes element A[addr] through a simple write port (we_i) and
// the search key through key_we_i. The memory has one read lane per class:
// bus_o[i] = A[i] at all times, so during the load phase every PE of class i
// sees its element at once, like a parallel load of a register. Writes take
// effect at the clock edge; reads are combinational. Contents reset to 0.
// The paper only assumes a backbone bus that lets all PEs read the memory at
// once; the register file, the write port and the key register are this
// design's choices.
module a_memory
  import xpa_pkg::*;
#(
  parameter int N  = 5,
  parameter int W  = 8,
  parameter int RW = idx_bits(N)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                we_i,
  input  logic [RW-1:0]       addr_i,
  input  logic [W-1:0]        wdata_i,
  input  logic                key_we_i,
  input  logic [W-1:0]        key_i,
  output logic [N-1:0][W-1:0] bus_o,
  output logic [W-1:0]        key_o
);

  logic [N-1:0][W-1:0] mem_q;
  logic [W-1:0]        key_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_q <= '0;
      key_q <= '0;
    end else begin
      if (we_i && 32'(addr_i) < N) mem_q[addr_i] <= wdata_i;
      if (key_we_i)                key_q        <= key_i;
    end
  end

  assign bus_o = mem_q;
  assign key_o = key_q;

endmodule
