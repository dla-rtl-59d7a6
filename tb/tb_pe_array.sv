// tb_pe_array: checks a 4-PE array (C_VEC=4, S_VEC=3, P_VEC=2). Distinct
// filters are written into bank 1 of every PE's cache, then groups of 1..4
// steps are streamed in reading bank 1. Each PE's sums are compared with
// sums computed in the testbench from the same filters and features, and
// grp_valid must arrive K_VEC+2 cycles after the last step enters the array.
module tb_pe_array;
  import dla_pkg::*;
  localparam int C = 4, S = 3, P = 2, K = 4, FD = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_first = 0, in_last = 0, in_mode = 0;
  logic [3:0] in_faddr = 0;
  logic [1:0] in_slot = 0;
  data_t in_feat [P][S][C];
  logic fc_we = 0, fc_wbank = 0;
  logic [1:0] fc_sel = 0;
  logic [3:0] fc_waddr = 0;
  logic [S*C*DATA_W-1:0] fc_wdata = '0;
  logic grp_valid;
  acc_t res [K][P][S];

  pe_array #(.C_VEC(C), .S_VEC(S), .P_VEC(P), .K_VEC(K), .FC_DEPTH(FD)) dut (.clk, .rst_n,
    .in_valid, .in_first, .in_last, .in_mode1x1(in_mode), .in_faddr, .in_slot, .in_feat, .rbank(1'b1),
    .fc_we, .fc_wbank, .fc_sel, .fc_waddr, .fc_wdata, .grp_valid, .res);

  data_t filt [K][FD][S][C];
  longint exp_acc [K][P][S];
  int cyc = 0, last_cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  initial begin
    for (int p = 0; p < P; p++) for (int s = 0; s < S; s++) for (int c = 0; c < C; c++) in_feat[p][s][c] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < K; k++) for (int a = 0; a < FD; a++) begin
      @(negedge clk);
      fc_we = 1; fc_wbank = 1; fc_sel = 2'(k); fc_waddr = 4'(a);
      for (int s = 0; s < S; s++) for (int c = 0; c < C; c++) begin
        filt[k][a][s][c] = data_t'($urandom_range(0, 600)) - 16'sd300;
        fc_wdata[(s*C+c)*DATA_W +: DATA_W] = filt[k][a][s][c];
      end
    end
    // bank 0 gets garbage that must not be used
    for (int k = 0; k < K; k++) begin
      @(negedge clk); fc_wbank = 0; fc_sel = 2'(k); fc_waddr = 4'(k); fc_wdata = '1;
    end
    @(negedge clk); fc_we = 0;
    for (int g = 0; g < 30; g++) begin
      automatic int n = $urandom_range(1, 4);
      automatic logic mode = (g % 3 == 2);
      for (int k = 0; k < K; k++) for (int p = 0; p < P; p++) for (int s = 0; s < S; s++) exp_acc[k][p][s] = 0;
      for (int t = 0; t < n; t++) begin
        automatic int a = $urandom_range(0, FD-1);
        @(negedge clk);
        in_valid = 1; in_first = (t == 0); in_last = (t == n-1); in_mode = mode; in_faddr = 4'(a);
        in_slot = mode ? 2'($urandom_range(0, S-1)) : 2'd0;
        for (int p = 0; p < P; p++) for (int s = 0; s < S; s++) for (int c = 0; c < C; c++)
          in_feat[p][s][c] = data_t'($urandom_range(0, 2000)) - 16'sd1000;
        for (int k = 0; k < K; k++) for (int p = 0; p < P; p++) for (int s = 0; s < S; s++) for (int c = 0; c < C; c++)
          if (mode) exp_acc[k][p][s] += longint'(in_feat[p][s][c]) * longint'(filt[k][a][in_slot][c]);
          else      exp_acc[k][p][0] += longint'(in_feat[p][s][c]) * longint'(filt[k][a][s][c]);
        if (t == n-1) last_cyc = cyc;
      end
      @(posedge clk); #1;
      in_valid = 0; in_first = 0; in_last = 0;
      while (!grp_valid) begin @(posedge clk); #1; end
      checks++;
      if (cyc - last_cyc != K + 2) begin failures++; $display("latency %0d", cyc - last_cyc); end
      @(posedge clk); #1;   // results are registered with grp_valid
      for (int k = 0; k < K; k++) for (int p = 0; p < P; p++) for (int s = 0; s < S; s++) begin
        checks++;
        if (res[k][p][s] != acc_t'(exp_acc[k][p][s])) begin
          failures++; $display("g%0d k%0d p%0d s%0d got %0d exp %0d", g, k, p, s, res[k][p][s], exp_acc[k][p][s]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
