// tb_conv_sequencer: runs whole convolutions through the convolution
// kernel: conv_sequencer reading a stream buffer, the PE array and the
// drain (C_VEC=4, S_VEC=3, P_VEC=2, K_VEC=8). Features are written into the
// stream buffer and filters into the PEs' caches by the testbench; the
// drain's output is accepted with random back-pressure. Every output word
// is compared with a reference convolution computed in the testbench
// (sum of products, >>> 8, saturate, optional ReLU). Cases: 3x3 pad 1,
// 1x1 mode with 2 and with 4 channel blocks (packed 3 per filter word),
// 5x5 stride 2 (two filter column segments), and a case whose sizes are
// not multiples of the vector widths. Checks that each output
// word arrives exactly once and that the drain stall happened.
module tb_conv_sequencer;
  import dla_pkg::*;
  localparam int C = 4, S = 3, P = 2, K = 8, SBD = 2048, FD = 128, NCB = K / C;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // configuration
  logic start = 0, finish;
  logic [31:0] in_base;
  logic [15:0] H, W, CB, OH, OW, KG, R, SC, KCB;
  logic [3:0] stride, pad;
  logic mode1x1, relu;

  logic sre [P*S]; logic [10:0] sra [P*S]; logic [C*DATA_W-1:0] srd [P*S];
  logic sb_re [P*S+1]; logic [10:0] sb_ra [P*S+1]; logic [C*DATA_W-1:0] sb_rd [P*S+1];
  logic sb_we = 0; logic [10:0] sb_wa = 0; logic [C*DATA_W-1:0] sb_wd = '0;
  for (genvar i = 0; i < P*S; i++) begin : g_p
    assign sb_re[i] = sre[i]; assign sb_ra[i] = sra[i]; assign srd[i] = sb_rd[i];
  end
  assign sb_re[P*S] = 1'b0; assign sb_ra[P*S] = '0;

  stream_buffer #(.DEPTH(SBD), .LANES(C), .N_RD(P*S+1)) u_sb (.clk, .rd_en(sb_re), .rd_addr(sb_ra),
    .rd_data(sb_rd), .we(sb_we), .waddr(sb_wa), .wdata(sb_wd));

  logic pv, pf, pl, pm; logic [6:0] pa; logic [1:0] pslot; data_t pfeat [P][S][C];
  logic take, idle, busy; logic [15:0] gkg, goh, gow; logic [31:0] stalls;
  conv_sequencer #(.C_VEC(C), .S_VEC(S), .P_VEC(P), .K_VEC(K), .SB_DEPTH(SBD), .FC_DEPTH(FD)) dut (
    .clk, .rst_n, .start, .finish, .in_base, .H, .W, .CB, .OH, .OW, .KG, .R, .SC, .stride, .pad,
    .mode1x1, .rd_en(sre), .rd_addr(sra), .rd_data(srd),
    .pe_valid(pv), .pe_first(pf), .pe_last(pl), .pe_mode1x1(pm), .pe_faddr(pa), .pe_slot(pslot), .pe_feat(pfeat),
    .drain_take(take), .drain_idle(idle), .grp_kg(gkg), .grp_oh(goh), .grp_ow(gow), .busy,
    .stall_cycles(stalls));

  logic fc_we = 0; logic [2:0] fc_sel = 0; logic [6:0] fc_wa = 0; logic [S*C*DATA_W-1:0] fc_wd = '0;
  logic gv; acc_t res [K][P][S];
  pe_array #(.C_VEC(C), .S_VEC(S), .P_VEC(P), .K_VEC(K), .FC_DEPTH(FD)) u_pes (.clk, .rst_n,
    .in_valid(pv), .in_first(pf), .in_last(pl), .in_mode1x1(pm), .in_faddr(pa), .in_slot(pslot), .in_feat(pfeat),
    .rbank(1'b0), .fc_we, .fc_wbank(1'b0), .fc_sel, .fc_waddr(fc_wa), .fc_wdata(fc_wd),
    .grp_valid(gv), .res);

  logic ov, ordy; data_t od [C]; coord_t oc;
  drain #(.C_VEC(C), .S_VEC(S), .P_VEC(P), .K_VEC(K)) u_dr (.clk, .rst_n, .grp_valid(gv), .res,
    .grp_kg(gkg), .grp_oh(goh), .grp_ow(gow), .mode1x1, .relu, .OH, .OW, .KCB,
    .take, .idle, .out_valid(ov), .out_data(od), .out_coord(oc), .out_ready(ordy));
  always_ff @(posedge clk) ordy <= ($urandom % 4) != 0;

  // reference data
  int fin [16][12][12];     // [channel][h][w]
  int fw  [16][16][5][5];   // [k][c][r][s]
  int got [4][12][12];      // count of words received per (cb, h, w)
  data_t outw [4][12][12][C];

  always_ff @(posedge clk) if (ov && ordy) begin
    if (oc.cb < 4 && oc.h < 12 && oc.w < 12) begin
      got[oc.cb][oc.h][oc.w]++;
      for (int c = 0; c < C; c++) outw[oc.cb][oc.h][oc.w][c] <= od[c];
    end else begin failures++; $display("coordinate out of range"); end
  end

  task automatic run_case(input int h_, w_, c_, k_, r_, s_, st_, pd_, input logic m1, rl);
    int oh_, ow_, cb_, kg_, sc_, kcb_;
    oh_ = (h_ + 2*pd_ - r_) / st_ + 1;
    ow_ = (w_ + 2*pd_ - s_) / st_ + 1;
    cb_ = (c_ + C - 1) / C; kg_ = (k_ + K - 1) / K; kcb_ = (k_ + C - 1) / C;
    sc_ = m1 ? 1 : (s_ + S - 1) / S;
    for (int c = 0; c < 16; c++) for (int y = 0; y < 12; y++) for (int x = 0; x < 12; x++)
      fin[c][y][x] = (c < c_ && y < h_ && x < w_) ? $urandom_range(0, 1023) - 512 : 0;
    for (int k = 0; k < 16; k++) for (int c = 0; c < 16; c++) for (int y = 0; y < 5; y++) for (int x = 0; x < 5; x++)
      fw[k][c][y][x] = (k < k_ && c < c_ && y < r_ && x < s_) ? $urandom_range(0, 255) - 128 : 0;
    // features into the stream buffer at base 100
    for (int b = 0; b < cb_; b++) for (int y = 0; y < h_; y++) for (int x = 0; x < w_; x++) begin
      @(negedge clk); sb_we = 1; sb_wa = 11'(100 + (b*h_ + y)*w_ + x);
      for (int c = 0; c < C; c++) sb_wd[c*DATA_W +: DATA_W] = 16'(fin[b*C+c][y][x]);
    end
    // filters: PE k word ((g*R + r)*SC + sc)*CB + b; in 1x1 mode S channel
    // blocks share a word: word g*ceil(CB/S) + b/S, tap slot b%S
    if (m1) for (int k = 0; k < K; k++) for (int g = 0; g < kg_; g++)
      for (int wi = 0; wi < (cb_ + S - 1) / S; wi++) begin
        @(negedge clk); sb_we = 0; fc_we = 1; fc_sel = 3'(k);
        fc_wa = 7'(g*((cb_ + S - 1) / S) + wi);
        for (int s = 0; s < S; s++) for (int c = 0; c < C; c++)
          fc_wd[(s*C+c)*DATA_W +: DATA_W] = (wi*S + s < cb_) ? 16'(fw[g*K+k][(wi*S+s)*C+c][0][0]) : '0;
      end
    else for (int k = 0; k < K; k++) for (int g = 0; g < kg_; g++) for (int y = 0; y < r_; y++)
      for (int q = 0; q < sc_; q++) for (int b = 0; b < cb_; b++) begin
        @(negedge clk); sb_we = 0; fc_we = 1; fc_sel = 3'(k);
        fc_wa = 7'(((g*r_ + y)*sc_ + q)*cb_ + b);
        for (int s = 0; s < S; s++) for (int c = 0; c < C; c++)
          fc_wd[(s*C+c)*DATA_W +: DATA_W] = (q*S + s < 5) ? 16'(fw[g*K+k][b*C+c][y][q*S+s]) : '0;
      end
    @(negedge clk); sb_we = 0; fc_we = 0;
    for (int b = 0; b < 4; b++) for (int y = 0; y < 12; y++) for (int x = 0; x < 12; x++) got[b][y][x] = 0;
    in_base = 100; H = 16'(h_); W = 16'(w_); CB = 16'(cb_); OH = 16'(oh_); OW = 16'(ow_);
    KG = 16'(kg_); R = 16'(r_); SC = 16'(sc_); KCB = 16'(kcb_); stride = 4'(st_); pad = 4'(pd_);
    mode1x1 = m1; relu = rl;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!finish) @(posedge clk);
    repeat (3) @(posedge clk);
    for (int b = 0; b < kcb_; b++) for (int y = 0; y < oh_; y++) for (int x = 0; x < ow_; x++) begin
      checks++;
      if (got[b][y][x] != 1) begin failures++; $display("word (%0d,%0d,%0d) received %0d times", b, y, x, got[b][y][x]); end
      for (int c = 0; c < C; c++) begin
        longint acc; data_t e;
        acc = 0;
        for (int ci = 0; ci < c_; ci++) for (int i = 0; i < r_; i++) for (int j = 0; j < s_; j++) begin
          int iy, ix;
          iy = y*st_ + i - pd_; ix = x*st_ + j - pd_;
          if (iy >= 0 && iy < h_ && ix >= 0 && ix < w_) acc += longint'(fin[ci][iy][ix]) * fw[b*C+c][ci][i][j];
        end
        acc = acc >>> 8;
        if (acc > 32767) acc = 32767; else if (acc < -32768) acc = -32768;
        if (rl && acc < 0) acc = 0;
        e = data_t'(acc);
        checks++;
        if (outw[b][y][x][c] !== e) begin
          failures++;
          if (failures < 10) $display("out (%0d,%0d,%0d) ch%0d got %0d exp %0d", b, y, x, c, outw[b][y][x][c], e);
        end
      end
    end
    for (int b = kcb_; b < 4; b++) for (int y = 0; y < 12; y++) for (int x = 0; x < 12; x++)
      if (got[b][y][x] != 0) begin failures++; $display("extra word"); end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    run_case(6, 6, 6, 10, 3, 3, 1, 1, 1'b0, 1'b1);   // 3x3, pad 1, ReLU
    run_case(5, 7, 8, 8, 1, 1, 1, 0, 1'b1, 1'b0);    // 1x1 mode
    run_case(4, 5, 16, 8, 1, 1, 1, 0, 1'b1, 1'b1);  // 1x1 mode, 4 channel blocks packed in 2 words
    run_case(9, 9, 4, 8, 5, 5, 2, 2, 1'b0, 1'b0);    // 5x5 stride 2
    run_case(7, 5, 3, 5, 3, 3, 2, 0, 1'b0, 1'b1);    // odd sizes
    checks++;
    if (stalls == 0) begin failures++; $display("drain stall never happened"); end
    $display("stall cycles %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
