// tb_dla_top_full: the end-to-end test of tb_dla_top with the accelerator
// at its full default size (C_VEC=8, K_VEC=32, 64K-word stream buffer, ...).
// What follows describes both.
//
// tb_dla_top: end-to-end test of the whole accelerator. The testbench
// plays the host and the outside world: a VLIW program memory, a filter
// memory and a feature memory (each with random grants and a read latency
// of two cycles) and a stand-in LRN kernel that halves every value
// (x >>> 1) one narrow beat at a time. It assembles a six-subgraph VLIW
// program (header byte, length byte, 32-bit instructions sent low byte
// first) and starts the reader:
//   SG0  DMA load of a 2C-channel 6x6 tensor; filters of conv1 preloaded
//   SG1  conv1 3x3 pad 1 + ReLU -> max pool 2x2/2 -> writer, while conv2's
//        filters are preloaded and the DMA loads the LSTM input (and more)
//   SG2  conv2 1x1 in 1x1 mode -> LRN -> writer, the DMA stores SG1's result
//   SG3  FC (4C inputs, 2K gate rows, interleaved i,g,f,o) -> LSTM (clear)
//        -> writer, the DMA stores SG2's result, FC filters preloaded again
//   SG4  the same FC -> LSTM with the cell state kept -> writer
//   SG5  DMA store of both LSTM outputs
// All results are read back from the feature memory and compared with a
// reference computed here (integer convolution, >>> 8 and saturation;
// the LSTM through the package's sigmoid/tanh, whose own accuracy is
// checked by the LSTM kernel's testbench). Then every mechanism is counted
// and a failure is counted for any that never happened: drain stall of
// the sequencer, drain back-pressure, DMA waiting on the writer's write
// port, ring stall on a full instruction queue, 1x1 mode, filter preload
// into the idle bank while the PE array computes, the LRN width adapters
// (beats after the first), every Xbar route used, the LSTM cell state
// carried over. The full-size testbench is the same text with all top
// parameters at their defaults.
module tb_dla_top_full;
  import dla_pkg::*;
  localparam int C = 8, K = 32, S = 3, P = 2, LV = 2;   // the top's defaults
  localparam int NCB = K / C;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---------------- top ----------------
  logic prog_start = 0, prog_busy, prog_done;
  logic [31:0] prog_base = 0, prog_words = 0;
  logic im_req, im_gnt, im_rvalid; logic [31:0] im_addr, im_rdata;
  logic fm_req, fm_gnt, fm_rvalid; logic [31:0] fm_addr; logic [S*C*DATA_W-1:0] fm_rdata;
  logic xm_rd_req, xm_rd_gnt, xm_rd_valid, xm_wr_req, xm_wr_gnt;
  logic [31:0] xm_rd_addr, xm_wr_addr; logic [C*DATA_W-1:0] xm_rd_data, xm_wr_data;
  logic lrn_instr_valid, lrn_instr_ready, lrn_i_valid, lrn_i_ready, lrn_o_valid, lrn_o_ready;
  instr_t lrn_instr_data; data_t lrn_i_data [LV], lrn_o_data [LV]; coord_t lrn_i_coord, lrn_o_coord;
  logic [7:0] lrn_i_sub;
  logic [31:0] subgraphs_done, conv_stall_cycles, drain_bp_cycles, dma_wait_cycles,
               ring_stall_cycles, words_written;

  dla_top dut (
    .clk, .rst_n, .prog_start, .prog_base, .prog_words, .prog_busy, .prog_done,
    .im_req, .im_addr, .im_gnt, .im_rvalid, .im_rdata,
    .fm_req, .fm_addr, .fm_gnt, .fm_rvalid, .fm_rdata,
    .xm_rd_req, .xm_rd_addr, .xm_rd_gnt, .xm_rd_valid, .xm_rd_data,
    .xm_wr_req, .xm_wr_addr, .xm_wr_data, .xm_wr_gnt,
    .lrn_instr_valid, .lrn_instr_data, .lrn_instr_ready,
    .lrn_i_valid, .lrn_i_data, .lrn_i_coord, .lrn_i_sub, .lrn_i_ready,
    .lrn_o_valid, .lrn_o_data, .lrn_o_coord, .lrn_o_ready,
    .subgraphs_done, .conv_stall_cycles, .drain_bp_cycles, .dma_wait_cycles,
    .ring_stall_cycles, .words_written);

  // ---------------- memory models ----------------
  logic [31:0] imem [4096];
  logic [S*C*DATA_W-1:0] fmem [8192];
  logic [C*DATA_W-1:0] xmem [8192];
  logic [1:0] iv_p, fv_p, xv_p; logic [31:0] ia_p [2], fa_p [2], xa_p [2];
  always_ff @(posedge clk) begin
    im_gnt <= ($urandom % 4) != 0;
    fm_gnt <= ($urandom % 3) != 0;
    xm_rd_gnt <= ($urandom % 2) != 0;
    xm_wr_gnt <= ($urandom % 3) != 0;
    iv_p <= {iv_p[0], im_req & im_gnt};      ia_p[0] <= im_addr;    ia_p[1] <= ia_p[0];
    fv_p <= {fv_p[0], fm_req & fm_gnt};      fa_p[0] <= fm_addr;    fa_p[1] <= fa_p[0];
    xv_p <= {xv_p[0], xm_rd_req & xm_rd_gnt}; xa_p[0] <= xm_rd_addr; xa_p[1] <= xa_p[0];
    if (xm_wr_req && xm_wr_gnt) xmem[xm_wr_addr[12:0]] <= xm_wr_data;
  end
  assign im_rvalid = iv_p[1]; assign im_rdata = imem[ia_p[1][11:0]];
  assign fm_rvalid = fv_p[1]; assign fm_rdata = fmem[fa_p[1][12:0]];
  assign xm_rd_valid = xv_p[1]; assign xm_rd_data = xmem[xa_p[1][12:0]];

  // ---------------- LRN stand-in: x >>> 1 per lane, one beat register -----
  int lrn_instrs = 0;
  always_ff @(posedge clk) lrn_instr_ready <= ($urandom % 2) != 0;
  always_ff @(posedge clk) if (lrn_instr_valid && lrn_instr_ready) lrn_instrs++;
  assign lrn_i_ready = !lrn_o_valid || lrn_o_ready;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) lrn_o_valid <= 1'b0;
    else if (lrn_i_ready) begin
      lrn_o_valid <= lrn_i_valid; lrn_o_coord <= lrn_i_coord;
      for (int l = 0; l < LV; l++) lrn_o_data[l] <= lrn_i_data[l] >>> 1;
    end

  // ---------------- workload sizes ----------------
  localparam int H1 = 6, W1 = 6, CI1 = 2*C, CO1 = 2*K;             // conv1
  localparam int CB1 = CI1 / C, KG1 = CO1 / K, KCB1 = CO1 / C;
  localparam int PH = 3, PW = 3;                                    // after pool
  localparam int CO2 = K, KCB2 = CO2 / C;                           // conv2 1x1
  localparam int CI3 = 4*C, CB3 = CI3 / C, ROWS = 2*K, KG3 = ROWS / K, KCB3 = ROWS / C;
  localparam int UNITS = ROWS / 4, HW3 = (UNITS + C - 1) / C;       // LSTM
  localparam int SB_A = 0, SB_P = 1000, SB_L = 1100, SB_X = 2000, SB_H = 3000;
  localparam int X_A = 0, X_X = 200, X_P = 4000, X_L = 4400, X_H = 4800;
  localparam int F1 = 0, F2 = 2000, F3 = 4000;
  localparam int WPP1 = KG1*3*1*CB1, WPP2 = (KCB1 + S - 1) / S, WPP3 = KG3*1*1*CB3;
  localparam int DMA_FILL = 600;

  int a [CI1][H1][W1];          // input tensor
  int w1 [CO1][CI1][3][3];
  int w2 [CO2][CO1];
  int w3 [ROWS][CI3];
  int xv [CI3];
  int c1 [CO1][H1][W1];
  int pl [CO1][PH][PW];
  int c2 [CO2][PH][PW];
  data_t hq [2][UNITS];

  function automatic int satr(longint v, logic relu);
    v = v >>> 8;
    if (v > 32767) v = 32767; else if (v < -32768) v = -32768;
    if (relu && v < 0) v = 0;
    return int'(v);
  endfunction

  // ---------------- program assembly ----------------
  byte unsigned prog [$];
  task automatic kern(input kid_e kid, input logic [31:0] ins [$]);
    prog.push_back(8'(kid)); prog.push_back(8'(ins.size()));
    foreach (ins[i]) for (int b = 0; b < 4; b++) prog.push_back(ins[i][8*b +: 8]);
  endtask
  // one subgraph: every kernel gets its full instruction block
  task automatic subgraph(input logic [31:0] conv [$], filt [$], dma [$], pool [$],
                          lstm [$], xb [$], wr [$], input logic lrn);
    kern(KID_CONV, conv); kern(KID_FILTER, filt); kern(KID_DMA, dma); kern(KID_POOL, pool);
    kern(KID_LSTM, lstm); kern(KID_XBAR, xb); kern(KID_WRITER, wr);
    if (lrn) begin
      logic [31:0] li [$];
      li = '{32'h1, 32'd5, 32'd1, 32'd0};   // opaque to this design
      kern(KID_LRN, li);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_1x1 = 0, n_preload_overlap = 0, n_lrn_beats = 0, n_carry = 0;
  int route [4][4];   // [producer][consumer] words moved
  always_ff @(posedge clk) if (rst_n) begin
    if (dut.pe_valid && dut.pe_mode) n_1x1++;
    if (dut.fc_we && dut.pe_valid) n_preload_overlap++;
    if (lrn_i_valid && lrn_i_ready && lrn_i_sub != 0) n_lrn_beats++;
    if (dut.u_lstm.in_valid && dut.u_lstm.in_ready && !dut.u_lstm.clear) n_carry++;
    if (dut.pi_valid && dut.pi_ready) route[dut.c_xbar[1][1:0]][0]++;
    if (dut.li_valid && dut.li_ready) route[dut.c_xbar[2][1:0]][1]++;
    if (dut.u_xbar.ln_valid && dut.u_xbar.ln_ready) route[dut.c_xbar[3][1:0]][2]++;
    if (dut.w_valid && dut.w_ready) route[dut.c_xbar[4][1:0]][3]++;
  end

  task automatic need(input string what, input int n);
    checks++;
    $display("mechanism %-34s %0d", what, n);
    if (n == 0) begin failures++; $display("  never happened"); end
  endtask

  initial begin
    logic [31:0] off [$], z13 [$], z12 [$];
    foreach (route[i, j]) route[i][j] = 0;
    for (int i = 0; i < 4096; i++) imem[i] = '0;
    for (int i = 0; i < 8192; i++) begin fmem[i] = '0; xmem[i] = '0; end
    iv_p = 0; fv_p = 0; xv_p = 0;
    // ---- data ----
    foreach (a[c, y, x]) a[c][y][x] = $urandom_range(0, 1023) - 512;
    foreach (w1[k, c, y, x]) w1[k][c][y][x] = $urandom_range(0, 127) - 64;
    foreach (w2[k, c]) w2[k][c] = $urandom_range(0, 255) - 128;
    foreach (w3[k, c]) w3[k][c] = $urandom_range(0, 255) - 128;
    foreach (xv[c]) xv[c] = $urandom_range(0, 511) - 256;
    for (int b = 0; b < CB1; b++) for (int y = 0; y < H1; y++) for (int x = 0; x < W1; x++)
      for (int c = 0; c < C; c++) xmem[X_A + (b*H1 + y)*W1 + x][c*DATA_W +: DATA_W] = 16'(a[b*C+c][y][x]);
    for (int i = 0; i < DMA_FILL; i++) xmem[X_X + i] = {C{16'(i)}};
    for (int b = 0; b < CB3; b++) for (int c = 0; c < C; c++) xmem[X_X + b][c*DATA_W +: DATA_W] = 16'(xv[b*C+c]);
    // filters, PE k, word ((g*R + r)*SC + sc)*CB + b, lanes (s*C + c)
    for (int k = 0; k < K; k++) begin
      for (int g = 0; g < KG1; g++) for (int r = 0; r < 3; r++) for (int b = 0; b < CB1; b++)
        for (int s = 0; s < S; s++) for (int c = 0; c < C; c++)
          fmem[F1 + k*WPP1 + (g*3 + r)*CB1 + b][(s*C+c)*DATA_W +: DATA_W] = 16'(w1[g*K+k][b*C+c][r][s]);
      for (int b = 0; b < KCB1; b++) for (int c = 0; c < C; c++)
        fmem[F2 + k*WPP2 + b/S][((b%S)*C + c)*DATA_W +: DATA_W] = 16'(w2[k][b*C+c]);
      for (int g = 0; g < KG3; g++) for (int b = 0; b < CB3; b++) for (int c = 0; c < C; c++)
        fmem[F3 + k*WPP3 + g*CB3 + b][c*DATA_W +: DATA_W] = 16'(w3[g*K+k][b*C+c]);
    end
    // ---- reference ----
    foreach (c1[k, y, x]) begin
      longint acc;
      acc = 0;
      for (int c = 0; c < CI1; c++) for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++)
        if (y+i-1 >= 0 && y+i-1 < H1 && x+j-1 >= 0 && x+j-1 < W1) acc += longint'(a[c][y+i-1][x+j-1]) * w1[k][c][i][j];
      c1[k][y][x] = satr(acc, 1);
    end
    foreach (pl[k, y, x]) begin
      int m;
      m = -32768;
      for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++) if (c1[k][2*y+i][2*x+j] > m) m = c1[k][2*y+i][2*x+j];
      pl[k][y][x] = m;
    end
    foreach (c2[k, y, x]) begin
      longint acc;
      acc = 0;
      for (int c = 0; c < CO1; c++) acc += longint'(pl[c][y][x]) * w2[k][c];
      c2[k][y][x] = satr(acc, 0) >>> 1;   // the LRN stand-in halves
    end
    for (int t = 0; t < 2; t++) for (int u = 0; u < UNITS; u++) begin
      data_t g [4], cp, cn;
      for (int q = 0; q < 4; q++) begin
        longint acc;
      acc = 0;
        for (int c = 0; c < CI3; c++) acc += longint'(xv[c]) * w3[4*u+q][c];
        g[q] = data_t'(satr(acc, 0));
      end
      cp = (t == 0) ? '0 : hq[1][u];   // hq[1] holds c_t of step 0 until overwritten
      cn = sat(ACC_W'(fmul(sigmoid(g[2]), cp)) + ACC_W'(fmul(sigmoid(g[0]), tanh_f(g[1]))));
      hq[1][u] = cn;
      hq[t][u] = fmul(sigmoid(g[3]), tanh_f(cn));
    end
    // ---- program ----
    off = '{32'd0, 32'd0, 32'd0, 32'd0};
    z13 = {}; for (int i = 0; i < N_CONV_INSTR; i++) z13.push_back(32'd0);
    z12 = {}; for (int i = 0; i < N_POOL_INSTR; i++) z12.push_back(32'd0);
    // SG0
    subgraph(z13, '{1, F1, WPP1, K}, '{1, X_A, SB_A, CB1*H1*W1}, z12, '{0, 0},
             '{1, SRC_NONE, SRC_NONE, SRC_NONE, SRC_NONE}, '{0, 0, 0, 0, 0}, 0);
    // SG1
    subgraph('{32'b101, SB_A, H1, W1, CB1, H1, W1, KG1, KCB1, 3, 1, 1, 1},
             '{1, F2, WPP2, K}, '{1, X_X, SB_X, DMA_FILL},
             '{1, H1, W1, NCB, KCB1, PH, PW, 2, 2, 2, 0, 16384}, '{0, 0},
             '{1, SRC_DRAIN, SRC_NONE, SRC_NONE, SRC_POOL}, '{1, SB_P, PH, PW, KCB1*PH*PW}, 1);
    // SG2
    subgraph('{32'b011, SB_P, PH, PW, KCB1, PH, PW, 1, KCB2, 1, 1, 1, 0},
             '{1, F3, WPP3, K}, '{3, X_P, SB_P, KCB1*PH*PW}, z12, '{0, 0},
             '{1, SRC_NONE, SRC_NONE, SRC_DRAIN, SRC_LRN}, '{1, SB_L, PH, PW, KCB2*PH*PW}, 0);
    // SG3
    subgraph('{32'b001, SB_X, 1, 1, CB3, 1, 1, KG3, KCB3, 1, 1, 1, 0},
             '{1, F3, WPP3, K}, '{3, X_L, SB_L, KCB2*PH*PW}, z12, '{32'b11, UNITS},
             '{1, SRC_NONE, SRC_DRAIN, SRC_NONE, SRC_LSTM}, '{1, SB_H, 1, 1, HW3}, 0);
    // SG4
    subgraph('{32'b001, SB_X, 1, 1, CB3, 1, 1, KG3, KCB3, 1, 1, 1, 0},
             off, off, z12, '{32'b01, UNITS},
             '{1, SRC_NONE, SRC_DRAIN, SRC_NONE, SRC_LSTM}, '{1, SB_H + HW3, 1, 1, HW3}, 0);
    // SG5
    subgraph(z13, off, '{3, X_H, SB_H, 2*HW3}, z12, '{0, 0},
             '{1, SRC_NONE, SRC_NONE, SRC_NONE, SRC_NONE}, '{0, 0, 0, 0, 0}, 0);
    while (prog.size() % 4 != 0) prog.push_back(8'h00);   // NOP padding
    for (int i = 0; i < prog.size() / 4; i++)
      imem[i] = {prog[4*i+3], prog[4*i+2], prog[4*i+1], prog[4*i]};
    $display("program: %0d bytes", prog.size());
    // ---- run ----
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); prog_base = 0; prog_words = 32'(prog.size() / 4); prog_start = 1;
    @(negedge clk); prog_start = 0;
    while (subgraphs_done < 6) @(negedge clk);
    while (!prog_done && prog_busy) @(negedge clk);
    repeat (10) @(negedge clk);
    // ---- results ----
    for (int b = 0; b < KCB1; b++) for (int y = 0; y < PH; y++) for (int x = 0; x < PW; x++)
      for (int c = 0; c < C; c++) begin
        checks++;
        if (data_t'(xmem[X_P + (b*PH + y)*PW + x][c*DATA_W +: DATA_W]) != data_t'(pl[b*C+c][y][x])) begin
          failures++; if (failures < 10) $display("pool out ch%0d (%0d,%0d) got %0d exp %0d", b*C+c, y, x,
            data_t'(xmem[X_P + (b*PH + y)*PW + x][c*DATA_W +: DATA_W]), pl[b*C+c][y][x]);
        end
      end
    for (int b = 0; b < KCB2; b++) for (int y = 0; y < PH; y++) for (int x = 0; x < PW; x++)
      for (int c = 0; c < C; c++) begin
        checks++;
        if (data_t'(xmem[X_L + (b*PH + y)*PW + x][c*DATA_W +: DATA_W]) != data_t'(c2[b*C+c][y][x])) begin
          failures++; if (failures < 10) $display("lrn out ch%0d (%0d,%0d) got %0d exp %0d", b*C+c, y, x,
            data_t'(xmem[X_L + (b*PH + y)*PW + x][c*DATA_W +: DATA_W]), c2[b*C+c][y][x]);
        end
      end
    for (int t = 0; t < 2; t++) for (int u = 0; u < UNITS; u++) begin
      checks++;
      if (data_t'(xmem[X_H + t*HW3 + u/C][(u%C)*DATA_W +: DATA_W]) != hq[t][u]) begin
        failures++; if (failures < 10) $display("lstm h step %0d unit %0d got %0d exp %0d", t, u,
          data_t'(xmem[X_H + t*HW3 + u/C][(u%C)*DATA_W +: DATA_W]), hq[t][u]);
      end
    end
    checks++;
    if (words_written != 32'(KCB1*PH*PW + KCB2*PH*PW + 2*HW3)) begin
      failures++; $display("words written %0d", words_written);
    end
    // ---- mechanisms ----
    need("sequencer stall on busy drain", conv_stall_cycles);
    need("drain back-pressure", drain_bp_cycles);
    need("DMA waits on writer's port", dma_wait_cycles);
    need("ring stall (instruction queue full)", ring_stall_cycles);
    need("1x1 mode steps", n_1x1);
    need("filter preload during compute", n_preload_overlap);
    need("LRN narrow beats after the first", n_lrn_beats);
    need("LRN instructions delivered", lrn_instrs);
    need("LSTM words with cell state kept", n_carry);
    need("route drain -> pool", route[SRC_DRAIN][0]);
    need("route pool -> writer", route[SRC_POOL][3]);
    need("route drain -> LRN", route[SRC_DRAIN][2]);
    need("route LRN -> writer", route[SRC_LRN][3]);
    need("route drain -> LSTM", route[SRC_DRAIN][1]);
    need("route LSTM -> writer", route[SRC_LSTM][3]);
    $display("cycles %0t", $time / 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog: %0d subgraphs done", subgraphs_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
