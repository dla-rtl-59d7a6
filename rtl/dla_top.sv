// dla_top: the DLA overlay, a programmable neural-network inference engine.
//
// Structure (data path): the stream buffer holds the current subgraph's
// input tensor; the convolution sequencer reads it and feeds a 1D systolic
// array of K_VEC PEs, each with a double-buffered filter cache; the drain
// turns finished output groups into a stream of tensor words; the Xbar
// routes that stream through the auxiliary kernels selected for the
// subgraph (pool, LSTM, and an external LRN kernel) to the stream writer,
// which stores the result back into the stream buffer. A feature DMA moves
// slices between external memory and the stream buffer, and the filter
// loader prefetches the next subgraph's filters into the idle filter bank.
//
// Control: the host starts the VLIW reader on a program in external
// memory. The reader sends it down an 8-bit ring through one transport per
// kernel; each transport keeps the 32-bit instructions addressed to its
// kernel. Every kernel loads one instruction block per subgraph into its
// registers, and all kernels start a subgraph together once all have loaded
// and move to the next one when all have finished (a barrier). The filter
// bank the PEs read flips at every subgraph boundary, so filters loaded in
// subgraph n are used in subgraph n+1.
//
// Instruction blocks (cfg[i] = i-th 32-bit instruction; cfg[0] bit 0 enables):
//   CONV   (13): {relu,1x1,en}, in_base, H, W, CB, OH, OW, KG, KCB, R, SC,
//                stride, pad
//   FILTER (4) : en, ext_base, words_per_pe, num_pe
//   DMA    (4) : {dir,en}, ext_addr, sb_addr, n_words
//   POOL   (12): {avg,en}, H, W, CBG, TOTAL_CB, OH, OW, WIN_H, WIN_W,
//                stride, pad, avg_mult
//   LSTM   (2) : {clear,en}, n_units
//   XBAR   (5) : en, pool_src, lstm_src, lrn_src, wr_src
//   WRITER (5) : en, base, OH, OW, n_words
// The LRN kernel has a transport on the ring but sits outside this design;
// its instruction queue and Xbar ports are top-level ports, and it does not
// take part in the barrier.
//
// Defaults: P_VEC = 2, K_VEC = 32 (the paper's final GoogLeNet
// configuration), S_VEC = 3 (paper: 3x3 filter vectorisation), 8-bit ring,
// 32-bit instructions. C_VEC = 8, LRN_VEC = 2 and all memory depths are
// this design's choices. Counters at the bottom report how often the
// design's stall and back-pressure mechanisms acted.
module dla_top
  import dla_pkg::*;
#(
  parameter int C_VEC      = 8,
  parameter int S_VEC      = 3,
  parameter int P_VEC      = 2,
  parameter int K_VEC      = 32,
  parameter int FC_DEPTH   = 512,
  parameter int SB_DEPTH   = 65536,
  parameter int POOL_DEPTH = 16384,
  parameter int LSTM_UNITS = 2048,
  parameter int LRN_VEC    = 2,
  parameter int FIFO_DEPTH = 32
) (
  input  logic clk,
  input  logic rst_n,
  // host control
  input  logic        prog_start,
  input  logic [31:0] prog_base,
  input  logic [31:0] prog_words,
  output logic        prog_busy,
  output logic        prog_done,
  // external memory: VLIW program
  output logic        im_req,
  output logic [31:0] im_addr,
  input  logic        im_gnt,
  input  logic        im_rvalid,
  input  logic [31:0] im_rdata,
  // external memory: filters
  output logic        fm_req,
  output logic [31:0] fm_addr,
  input  logic        fm_gnt,
  input  logic        fm_rvalid,
  input  logic [S_VEC*C_VEC*DATA_W-1:0] fm_rdata,
  // external memory: features
  output logic        xm_rd_req,
  output logic [31:0] xm_rd_addr,
  input  logic        xm_rd_gnt,
  input  logic        xm_rd_valid,
  input  logic [C_VEC*DATA_W-1:0] xm_rd_data,
  output logic        xm_wr_req,
  output logic [31:0] xm_wr_addr,
  output logic [C_VEC*DATA_W-1:0] xm_wr_data,
  input  logic        xm_wr_gnt,
  // external LRN kernel
  output logic        lrn_instr_valid,
  output instr_t      lrn_instr_data,
  input  logic        lrn_instr_ready,
  output logic        lrn_i_valid,
  output data_t       lrn_i_data [LRN_VEC],
  output coord_t      lrn_i_coord,
  output logic [7:0]  lrn_i_sub,
  input  logic        lrn_i_ready,
  input  logic        lrn_o_valid,
  input  data_t       lrn_o_data [LRN_VEC],
  input  coord_t      lrn_o_coord,
  output logic        lrn_o_ready,
  // status
  output logic [31:0] subgraphs_done,
  output logic [31:0] conv_stall_cycles,
  output logic [31:0] drain_bp_cycles,
  output logic [31:0] dma_wait_cycles,
  output logic [31:0] ring_stall_cycles,
  output logic [31:0] words_written
);
  localparam int NK  = 7;              // kernels in the barrier
  localparam int NT  = 8;              // transports on the ring
  localparam int NRD = P_VEC * S_VEC;  // conv read ports
  localparam int SA  = $clog2(SB_DEPTH);
  localparam int FA  = $clog2(FC_DEPTH);
  localparam int SW  = (S_VEC > 1) ? $clog2(S_VEC) : 1;
  localparam logic [7:0] TKID [NT] = '{KID_CONV, KID_FILTER, KID_DMA, KID_POOL,
                                       KID_LSTM, KID_XBAR, KID_WRITER, KID_LRN};
  localparam int K_CONV = 0, K_FILT = 1, K_DMA = 2, K_POOL = 3, K_LSTM = 4,
                 K_XBAR = 5, K_WR = 6;

  // ---------------- VLIW network ----------------
  logic              rv [NT+1];
  logic [RING_W-1:0] rd [NT+1];
  logic              rr [NT+1];
  logic              iv [NT];
  instr_t            id [NT];
  logic              ir [NT];

  vliw_reader u_reader (
    .clk, .rst_n, .start(prog_start), .base(prog_base), .n_words(prog_words),
    .busy(prog_busy), .done(prog_done),
    .mem_req(im_req), .mem_addr(im_addr), .mem_gnt(im_gnt),
    .mem_rvalid(im_rvalid), .mem_rdata(im_rdata),
    .ring_out_valid(rv[0]), .ring_out_data(rd[0]), .ring_out_ready(rr[0]),
    .ring_in_valid(rv[NT]), .ring_in_data(rd[NT])
  );
  assign rr[NT] = 1'b1;   // the reader always takes returning bytes

  for (genvar t = 0; t < NT; t++) begin : g_tp
    vliw_transport #(.KID(TKID[t]), .FIFO_DEPTH(FIFO_DEPTH)) u_tp (
      .clk, .rst_n,
      .in_valid(rv[t]), .in_data(rd[t]), .in_ready(rr[t]),
      .out_valid(rv[t+1]), .out_data(rd[t+1]), .out_ready(rr[t+1]),
      .instr_valid(iv[t]), .instr_data(id[t]), .instr_ready(ir[t])
    );
  end
  assign lrn_instr_valid = iv[7];
  assign lrn_instr_data  = id[7];
  assign ir[7]           = lrn_instr_ready;

  // ---------------- kernel instruction registers and barrier -------------
  logic loaded [NK], kdone [NK], kstart [NK], kfin [NK];
  logic all_loaded, all_done;
  always_comb begin
    all_loaded = 1'b1; all_done = 1'b1;
    for (int k = 0; k < NK; k++) begin
      all_loaded &= loaded[k];
      all_done   &= kdone[k];
    end
  end

  instr_t c_conv [N_CONV_INSTR];
  instr_t c_filt [N_FILTER_INSTR];
  instr_t c_dma  [N_DMA_INSTR];
  instr_t c_pool [N_POOL_INSTR];
  instr_t c_lstm [N_LSTM_INSTR];
  instr_t c_xbar [N_XBAR_INSTR];
  instr_t c_wr   [N_WRITER_INSTR];

  kernel_ctrl #(.N_INSTR(N_CONV_INSTR)) u_kc_conv (.clk, .rst_n,
    .instr_valid(iv[0]), .instr_data(id[0]), .instr_ready(ir[0]), .cfg(c_conv),
    .loaded(loaded[K_CONV]), .all_loaded, .start(kstart[K_CONV]), .finish(kfin[K_CONV]),
    .done(kdone[K_CONV]), .all_done);
  kernel_ctrl #(.N_INSTR(N_FILTER_INSTR)) u_kc_filt (.clk, .rst_n,
    .instr_valid(iv[1]), .instr_data(id[1]), .instr_ready(ir[1]), .cfg(c_filt),
    .loaded(loaded[K_FILT]), .all_loaded, .start(kstart[K_FILT]), .finish(kfin[K_FILT]),
    .done(kdone[K_FILT]), .all_done);
  kernel_ctrl #(.N_INSTR(N_DMA_INSTR)) u_kc_dma (.clk, .rst_n,
    .instr_valid(iv[2]), .instr_data(id[2]), .instr_ready(ir[2]), .cfg(c_dma),
    .loaded(loaded[K_DMA]), .all_loaded, .start(kstart[K_DMA]), .finish(kfin[K_DMA]),
    .done(kdone[K_DMA]), .all_done);
  kernel_ctrl #(.N_INSTR(N_POOL_INSTR)) u_kc_pool (.clk, .rst_n,
    .instr_valid(iv[3]), .instr_data(id[3]), .instr_ready(ir[3]), .cfg(c_pool),
    .loaded(loaded[K_POOL]), .all_loaded, .start(kstart[K_POOL]), .finish(kfin[K_POOL]),
    .done(kdone[K_POOL]), .all_done);
  kernel_ctrl #(.N_INSTR(N_LSTM_INSTR)) u_kc_lstm (.clk, .rst_n,
    .instr_valid(iv[4]), .instr_data(id[4]), .instr_ready(ir[4]), .cfg(c_lstm),
    .loaded(loaded[K_LSTM]), .all_loaded, .start(kstart[K_LSTM]), .finish(kfin[K_LSTM]),
    .done(kdone[K_LSTM]), .all_done);
  kernel_ctrl #(.N_INSTR(N_XBAR_INSTR)) u_kc_xbar (.clk, .rst_n,
    .instr_valid(iv[5]), .instr_data(id[5]), .instr_ready(ir[5]), .cfg(c_xbar),
    .loaded(loaded[K_XBAR]), .all_loaded, .start(kstart[K_XBAR]), .finish(kfin[K_XBAR]),
    .done(kdone[K_XBAR]), .all_done);
  kernel_ctrl #(.N_INSTR(N_WRITER_INSTR)) u_kc_wr (.clk, .rst_n,
    .instr_valid(iv[6]), .instr_data(id[6]), .instr_ready(ir[6]), .cfg(c_wr),
    .loaded(loaded[K_WR]), .all_loaded, .start(kstart[K_WR]), .finish(kfin[K_WR]),
    .done(kdone[K_WR]), .all_done);

  // the Xbar kernel only holds its routing; it finishes right away
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) kfin[K_XBAR] <= 1'b0; else kfin[K_XBAR] <= kstart[K_XBAR];

  // filter bank parity flips at every subgraph boundary
  logic sg_parity;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin sg_parity <= 1'b0; subgraphs_done <= '0; end
    else if (all_done) begin sg_parity <= ~sg_parity; subgraphs_done <= subgraphs_done + 1; end
  end

  // ---------------- stream buffer ----------------
  logic                 sb_re   [NRD+1];
  logic [SA-1:0]        sb_ra   [NRD+1];
  logic [C_VEC*DATA_W-1:0] sb_rdat [NRD+1];
  logic                 sb_we;
  logic [SA-1:0]        sb_wa;
  logic [C_VEC*DATA_W-1:0] sb_wd;

  stream_buffer #(.DEPTH(SB_DEPTH), .LANES(C_VEC), .N_RD(NRD+1)) u_sb (
    .clk, .rd_en(sb_re), .rd_addr(sb_ra), .rd_data(sb_rdat),
    .we(sb_we), .waddr(sb_wa), .wdata(sb_wd));

  // ---------------- convolution: sequencer, PE array, drain --------------
  logic cv_re [NRD];
  logic [SA-1:0] cv_ra [NRD];
  logic [C_VEC*DATA_W-1:0] cv_rd [NRD];
  for (genvar i = 0; i < NRD; i++) begin : g_cvp
    assign sb_re[i] = cv_re[i];
    assign sb_ra[i] = cv_ra[i];
    assign cv_rd[i] = sb_rdat[i];
  end

  logic  pe_valid, pe_first, pe_last, pe_mode;
  logic [FA-1:0] pe_faddr;
  logic [SW-1:0] pe_slot;
  data_t pe_feat [P_VEC][S_VEC][C_VEC];
  logic  drain_take, drain_idle;
  logic [15:0] grp_kg, grp_oh, grp_ow;
  logic  conv_busy;

  conv_sequencer #(.C_VEC(C_VEC), .S_VEC(S_VEC), .P_VEC(P_VEC), .K_VEC(K_VEC),
                   .SB_DEPTH(SB_DEPTH), .FC_DEPTH(FC_DEPTH)) u_seq (
    .clk, .rst_n, .start(kstart[K_CONV]), .finish(kfin[K_CONV]),
    .in_base(c_conv[1]), .H(c_conv[2][15:0]), .W(c_conv[3][15:0]), .CB(c_conv[4][15:0]),
    .OH(c_conv[5][15:0]), .OW(c_conv[6][15:0]), .KG(c_conv[7][15:0]),
    .R(c_conv[9][15:0]), .SC(c_conv[10][15:0]),
    .stride(c_conv[11][3:0]), .pad(c_conv[12][3:0]), .mode1x1(c_conv[0][1]),
    .rd_en(cv_re), .rd_addr(cv_ra), .rd_data(cv_rd),
    .pe_valid, .pe_first, .pe_last, .pe_mode1x1(pe_mode), .pe_faddr, .pe_slot, .pe_feat,
    .drain_take, .drain_idle, .grp_kg, .grp_oh, .grp_ow,
    .busy(conv_busy), .stall_cycles(conv_stall_cycles));

  logic fc_we;
  logic [$clog2(K_VEC)-1:0] fc_sel;
  logic [FA-1:0] fc_waddr;
  logic [S_VEC*C_VEC*DATA_W-1:0] fc_wdata;
  logic grp_valid;
  acc_t res [K_VEC][P_VEC][S_VEC];

  pe_array #(.C_VEC(C_VEC), .S_VEC(S_VEC), .P_VEC(P_VEC), .K_VEC(K_VEC),
             .FC_DEPTH(FC_DEPTH)) u_pes (
    .clk, .rst_n,
    .in_valid(pe_valid), .in_first(pe_first), .in_last(pe_last), .in_mode1x1(pe_mode),
    .in_faddr(pe_faddr), .in_slot(pe_slot), .in_feat(pe_feat), .rbank(sg_parity),
    .fc_we, .fc_wbank(~sg_parity), .fc_sel, .fc_waddr, .fc_wdata,
    .grp_valid, .res);

  logic   dr_valid, dr_ready;
  data_t  dr_data [C_VEC];
  coord_t dr_coord;

  drain #(.C_VEC(C_VEC), .S_VEC(S_VEC), .P_VEC(P_VEC), .K_VEC(K_VEC)) u_drain (
    .clk, .rst_n, .grp_valid, .res, .grp_kg, .grp_oh, .grp_ow,
    .mode1x1(c_conv[0][1]), .relu(c_conv[0][2]),
    .OH(c_conv[5][15:0]), .OW(c_conv[6][15:0]), .KCB(c_conv[8][15:0]),
    .take(drain_take), .idle(drain_idle),
    .out_valid(dr_valid), .out_data(dr_data), .out_coord(dr_coord), .out_ready(dr_ready));

  // ---------------- filter loader ----------------
  filter_loader #(.C_VEC(C_VEC), .S_VEC(S_VEC), .K_VEC(K_VEC), .FC_DEPTH(FC_DEPTH)) u_fl (
    .clk, .rst_n, .start(kstart[K_FILT]), .finish(kfin[K_FILT]),
    .ext_base(c_filt[1]), .words_per_pe(c_filt[2]), .num_pe(c_filt[3]),
    .rd_req(fm_req), .rd_addr(fm_addr), .rd_gnt(fm_gnt), .rd_valid(fm_rvalid),
    .rd_data(fm_rdata), .fc_we, .fc_sel, .fc_waddr, .fc_wdata);

  // ---------------- Xbar and auxiliary kernels ----------------
  logic   po_valid, po_ready, pi_valid, pi_ready;
  data_t  po_data [C_VEC], pi_data [C_VEC];
  coord_t po_coord, pi_coord;
  logic   lo_valid, lo_ready, li_valid, li_ready;
  data_t  lo_data [C_VEC], li_data [C_VEC];
  coord_t lo_coord, li_coord;
  logic   w_valid, w_ready;
  data_t  w_data [C_VEC];
  coord_t w_coord;

  xbar #(.C_VEC(C_VEC), .LRN_VEC(LRN_VEC)) u_xbar (
    .clk, .rst_n,
    .pool_src(xsrc_e'(c_xbar[1][2:0])), .lstm_src(xsrc_e'(c_xbar[2][2:0])),
    .lrn_src(xsrc_e'(c_xbar[3][2:0])), .wr_src(xsrc_e'(c_xbar[4][2:0])),
    .drain_valid(dr_valid), .drain_data(dr_data), .drain_coord(dr_coord), .drain_ready(dr_ready),
    .pool_o_valid(po_valid), .pool_o_data(po_data), .pool_o_coord(po_coord), .pool_o_ready(po_ready),
    .lstm_o_valid(lo_valid), .lstm_o_data(lo_data), .lstm_o_coord(lo_coord), .lstm_o_ready(lo_ready),
    .lrn_o_valid, .lrn_o_data, .lrn_o_coord, .lrn_o_ready,
    .pool_i_valid(pi_valid), .pool_i_data(pi_data), .pool_i_coord(pi_coord), .pool_i_ready(pi_ready),
    .lstm_i_valid(li_valid), .lstm_i_data(li_data), .lstm_i_coord(li_coord), .lstm_i_ready(li_ready),
    .lrn_i_valid, .lrn_i_data, .lrn_i_coord, .lrn_i_sub, .lrn_i_ready,
    .wr_valid(w_valid), .wr_data(w_data), .wr_coord(w_coord), .wr_ready(w_ready));

  pool_kernel #(.C_VEC(C_VEC), .DEPTH(POOL_DEPTH)) u_pool (
    .clk, .rst_n, .start(kstart[K_POOL]), .finish(kfin[K_POOL]),
    .avg(c_pool[0][1]), .H(c_pool[1][15:0]), .W(c_pool[2][15:0]), .CBG(c_pool[3][15:0]),
    .TOTAL_CB(c_pool[4][15:0]), .OH(c_pool[5][15:0]), .OW(c_pool[6][15:0]),
    .WIN_H(c_pool[7][15:0]), .WIN_W(c_pool[8][15:0]),
    .stride(c_pool[9][3:0]), .pad(c_pool[10][3:0]), .avg_mult(c_pool[11][16:0]),
    .in_valid(pi_valid), .in_data(pi_data), .in_coord(pi_coord), .in_ready(pi_ready),
    .out_valid(po_valid), .out_data(po_data), .out_coord(po_coord), .out_ready(po_ready));

  lstm_kernel #(.C_VEC(C_VEC), .MAX_UNITS(LSTM_UNITS)) u_lstm (
    .clk, .rst_n, .start(kstart[K_LSTM]), .finish(kfin[K_LSTM]),
    .clear(c_lstm[0][1]), .n_units(c_lstm[1][15:0]),
    .in_valid(li_valid), .in_data(li_data), .in_coord(li_coord), .in_ready(li_ready),
    .out_valid(lo_valid), .out_data(lo_data), .out_coord(lo_coord), .out_ready(lo_ready));

  // ---------------- stream writer and feature DMA ----------------
  logic wr_we;
  logic [SA-1:0] wr_wa;
  logic [C_VEC*DATA_W-1:0] wr_wd;

  stream_writer #(.C_VEC(C_VEC), .SB_DEPTH(SB_DEPTH)) u_wr (
    .clk, .rst_n, .start(kstart[K_WR]), .finish(kfin[K_WR]),
    .base(c_wr[1]), .OH(c_wr[2][15:0]), .OW(c_wr[3][15:0]), .n_words(c_wr[4]),
    .in_valid(w_valid), .in_data(w_data), .in_coord(w_coord), .in_ready(w_ready),
    .we(wr_we), .waddr(wr_wa), .wdata(wr_wd), .words_written);

  logic dma_we;
  logic [SA-1:0] dma_wa;
  logic [C_VEC*DATA_W-1:0] dma_wd;

  feature_dma #(.C_VEC(C_VEC), .SB_DEPTH(SB_DEPTH)) u_dma (
    .clk, .rst_n, .start(kstart[K_DMA]), .finish(kfin[K_DMA]),
    .dir(c_dma[0][1]), .ext_addr(c_dma[1]), .sb_addr(c_dma[2]), .n_words(c_dma[3]),
    .rd_req(xm_rd_req), .rd_addr(xm_rd_addr), .rd_gnt(xm_rd_gnt), .rd_valid(xm_rd_valid),
    .rd_data(xm_rd_data),
    .wr_req(xm_wr_req), .wr_addr(xm_wr_addr), .wr_data(xm_wr_data), .wr_gnt(xm_wr_gnt),
    .sb_we(dma_we), .sb_waddr(dma_wa), .sb_wdata(dma_wd), .sb_wgnt(!wr_we),
    .sb_re(sb_re[NRD]), .sb_raddr(sb_ra[NRD]), .sb_rdata(sb_rdat[NRD]));

  // the stream writer has priority on the stream buffer write port
  assign sb_we = wr_we || dma_we;
  assign sb_wa = wr_we ? wr_wa : dma_wa;
  assign sb_wd = wr_we ? wr_wd : dma_wd;

  // ---------------- mechanism counters ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drain_bp_cycles <= '0; dma_wait_cycles <= '0; ring_stall_cycles <= '0;
    end else begin
      if (dr_valid && !dr_ready) drain_bp_cycles <= drain_bp_cycles + 1;
      if (dma_we && wr_we)       dma_wait_cycles <= dma_wait_cycles + 1;
      if (rv[0] && !rr[0])       ring_stall_cycles <= ring_stall_cycles + 1;
    end
  end
endmodule
