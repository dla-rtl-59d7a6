// filter_cache: double-buffered filter store of one PE.
//
// Two banks of DEPTH filter words; a word is S_VEC x C_VEC filter values
// (one filter row segment over C_VEC input channels). The PE reads bank
// rbank while the filter loader writes the next subgraph's filters into the
// other bank, so filter loading overlaps computation, as in the paper.
// Write: we/wbank/waddr/wdata in one cycle. Read: raddr (bank rbank) gives
// rdata on the next clock edge, like a block RAM. The bank size is not given
// by the paper; DEPTH is this design's choice.
module filter_cache
  import dla_pkg::*;
#(
  parameter int C_VEC = 8,
  parameter int S_VEC = 3,
  parameter int DEPTH = 512
) (
  input  logic clk,
  input  logic we,
  input  logic wbank,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [S_VEC*C_VEC*DATA_W-1:0] wdata,
  input  logic rbank,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output data_t rdata [S_VEC][C_VEC]
);
  logic [S_VEC*C_VEC*DATA_W-1:0] mem [2*DEPTH];
  logic [S_VEC*C_VEC*DATA_W-1:0] q;

  always_ff @(posedge clk) begin
    if (we) mem[{wbank, waddr}] <= wdata;
    q <= mem[{rbank, raddr}];
  end

  always_comb
    for (int s = 0; s < S_VEC; s++)
      for (int c = 0; c < C_VEC; c++)
        rdata[s][c] = data_t'(q[(s*C_VEC + c)*DATA_W +: DATA_W]);
endmodule
