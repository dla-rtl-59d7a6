// feature_dma: moves tensor slices between external memory and the stream
// buffer (loading inputs, spilling outputs that do not fit on chip).
//
// dir = 0 (load): reads n_words words from external word address ext_addr
// upward and writes them to the stream buffer from sb_addr upward. The
// stream buffer write port is shared with the stream writer, which has
// priority; sb_wgnt says the DMA's write went in.
// dir = 1 (store): reads the stream buffer and writes external memory.
// One word is in flight at a time (request, response, write), which is
// simple and slow; the paper gives the DMA's function only.
// External port: rd_req/rd_addr until rd_gnt, data on rd_valid; wr_req/
// wr_addr/wr_data until wr_gnt.
module feature_dma
  import dla_pkg::*;
#(
  parameter int C_VEC    = 8,
  parameter int SB_DEPTH = 65536
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic finish,
  input  logic        dir,
  input  logic [31:0] ext_addr,
  input  logic [31:0] sb_addr,
  input  logic [31:0] n_words,
  // external memory
  output logic        rd_req,
  output logic [31:0] rd_addr,
  input  logic        rd_gnt,
  input  logic        rd_valid,
  input  logic [C_VEC*DATA_W-1:0] rd_data,
  output logic        wr_req,
  output logic [31:0] wr_addr,
  output logic [C_VEC*DATA_W-1:0] wr_data,
  input  logic        wr_gnt,
  // stream buffer
  output logic        sb_we,
  output logic [$clog2(SB_DEPTH)-1:0] sb_waddr,
  output logic [C_VEC*DATA_W-1:0] sb_wdata,
  input  logic        sb_wgnt,
  output logic        sb_re,
  output logic [$clog2(SB_DEPTH)-1:0] sb_raddr,
  input  logic [C_VEC*DATA_W-1:0] sb_rdata
);
  typedef enum logic [2:0] {D_IDLE, D_REQ, D_WAIT, D_SBW, D_SBR, D_EXTW} dst_e;
  dst_e st;
  logic [31:0] ea, sa, left;
  logic [C_VEC*DATA_W-1:0] hold;

  assign rd_req   = (st == D_REQ);
  assign rd_addr  = ea;
  assign sb_we    = (st == D_SBW);
  assign sb_waddr = ($clog2(SB_DEPTH))'(sa);
  assign sb_wdata = hold;
  assign sb_re    = (st == D_SBR);
  assign sb_raddr = ($clog2(SB_DEPTH))'(sa);
  assign wr_req   = (st == D_EXTW);
  assign wr_addr  = ea;
  assign wr_data  = hold;

  logic sbr_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; ea <= '0; sa <= '0; left <= '0; hold <= '0; finish <= 1'b0; sbr_q <= 1'b0;
    end else begin
      finish <= 1'b0;
      sbr_q  <= (st == D_SBR);
      unique case (st)
        D_IDLE: if (start) begin
          ea <= ext_addr; sa <= sb_addr; left <= n_words;
          if (n_words == 0) finish <= 1'b1;
          else st <= dir ? D_SBR : D_REQ;
        end
        D_REQ:  if (rd_gnt) st <= D_WAIT;
        D_WAIT: if (rd_valid) begin hold <= rd_data; st <= D_SBW; end
        D_SBW:  if (sb_wgnt) begin
          ea <= ea + 1; sa <= sa + 1; left <= left - 1;
          if (left == 1) begin st <= D_IDLE; finish <= 1'b1; end
          else st <= D_REQ;
        end
        D_SBR:  st <= D_EXTW;
        D_EXTW: begin
          if (sbr_q) hold <= sb_rdata;
          if (wr_gnt && !sbr_q) begin
            ea <= ea + 1; sa <= sa + 1; left <= left - 1;
            if (left == 1) begin st <= D_IDLE; finish <= 1'b1; end
            else st <= D_SBR;
          end
        end
        default: st <= D_IDLE;
      endcase
    end
  end
endmodule
