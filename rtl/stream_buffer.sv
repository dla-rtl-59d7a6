// stream_buffer: the on-chip scratchpad that holds the input and output
// tensors of subgraphs.
//
// DEPTH words, each LANES feature values (one channel block of one pixel).
// N_RD independent read ports with one cycle of latency (rd_en/rd_addr in
// cycle t, rd_data valid from the clock edge at the end of t) and one write
// port. Where tensors live is decided by the compiler (inputs are usually
// placed from address 0 upwards, outputs from the top down, leaving the
// middle free for branches); the buffer itself only stores words.
// The N_RD read ports let the convolution read the P_VEC x S_VEC feature
// words of one step in one cycle; the paper does not describe the buffer's
// banking, so these ports are this design's choice. DEPTH is also assumed.
module stream_buffer
  import dla_pkg::*;
#(
  parameter int DEPTH = 65536,
  parameter int LANES = 8,
  parameter int N_RD  = 7
) (
  input  logic clk,
  input  logic                     rd_en   [N_RD],
  input  logic [$clog2(DEPTH)-1:0] rd_addr [N_RD],
  output logic [LANES*DATA_W-1:0]  rd_data [N_RD],
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [LANES*DATA_W-1:0]  wdata
);
  logic [LANES*DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    for (int i = 0; i < N_RD; i++)
      if (rd_en[i]) rd_data[i] <= mem[rd_addr[i]];
  end
endmodule
