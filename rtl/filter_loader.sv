// filter_loader: prefetches filters from external memory into the PE
// filter caches.
//
// It runs during subgraph n and fills the bank of every PE's filter cache
// that subgraph n+1 will read (wbank, the bank the PEs are not reading), so
// filter loading is hidden behind computation, as the paper's double-
// buffered filter caches intend. Layout in external memory: the
// words_per_pe filter words of PE 0, then those of PE 1, ... for num_pe
// PEs, starting at word address ext_base. A filter word is S_VEC x C_VEC
// values. Reads are pipelined: a new request may be issued every cycle and
// data returns in order; each returning word is written into PE sel,
// address addr of the target bank. Prefetch is one subgraph ahead (the
// paper's baseline); its deeper prefetch is described as future work.
module filter_loader
  import dla_pkg::*;
#(
  parameter int C_VEC    = 8,
  parameter int S_VEC    = 3,
  parameter int K_VEC    = 32,
  parameter int FC_DEPTH = 512
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic finish,
  input  logic [31:0] ext_base,
  input  logic [31:0] words_per_pe,
  input  logic [31:0] num_pe,
  // external memory
  output logic        rd_req,
  output logic [31:0] rd_addr,
  input  logic        rd_gnt,
  input  logic        rd_valid,
  input  logic [S_VEC*C_VEC*DATA_W-1:0] rd_data,
  // filter cache write port (bank chosen outside)
  output logic fc_we,
  output logic [$clog2(K_VEC)-1:0] fc_sel,
  output logic [$clog2(FC_DEPTH)-1:0] fc_waddr,
  output logic [S_VEC*C_VEC*DATA_W-1:0] fc_wdata
);
  logic active;
  logic [31:0] req_left, rsp_left, word_i, pe_i;

  assign rd_req = active && (req_left != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; req_left <= '0; rsp_left <= '0; rd_addr <= '0;
      word_i <= '0; pe_i <= '0; finish <= 1'b0;
      fc_we <= 1'b0; fc_sel <= '0; fc_waddr <= '0; fc_wdata <= '0;
    end else begin
      finish <= 1'b0;
      fc_we  <= 1'b0;
      if (start) begin
        req_left <= words_per_pe * num_pe; rsp_left <= words_per_pe * num_pe;
        rd_addr  <= ext_base; word_i <= '0; pe_i <= '0;
        active   <= (words_per_pe * num_pe != 0);
        finish   <= (words_per_pe * num_pe == 0);
      end else if (active) begin
        if (rd_req && rd_gnt) begin
          rd_addr <= rd_addr + 1; req_left <= req_left - 1;
        end
        if (rd_valid) begin
          fc_we    <= 1'b1;
          fc_sel   <= ($clog2(K_VEC))'(pe_i);
          fc_waddr <= ($clog2(FC_DEPTH))'(word_i);
          fc_wdata <= rd_data;
          if (word_i == words_per_pe - 1) begin word_i <= '0; pe_i <= pe_i + 1; end
          else word_i <= word_i + 1;
          rsp_left <= rsp_left - 1;
          if (rsp_left == 1) begin active <= 1'b0; finish <= 1'b1; end
        end
      end
    end
  end
endmodule
