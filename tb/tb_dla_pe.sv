// tb_dla_pe: checks one PE at C_VEC=8, S_VEC=3, P_VEC=2. Random groups of
// 1..5 steps are streamed in, alternating normal and 1x1 mode; the weight
// for each step is supplied one cycle after the step, as the filter cache
// would. Expected sums are computed in the testbench from the definition:
// normal mode lane 0 = sum over taps and channels; 1x1 mode lane s = sum
// over channels with the weights of the step's random tap slot. Also checks that res_valid comes two
// cycles after the step marked last, and that the bundle is forwarded
// unchanged one cycle later.
module tb_dla_pe;
  import dla_pkg::*;
  localparam int C = 8, S = 3, P = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_first = 0, in_last = 0, in_mode = 0;
  logic [9:0] in_faddr = 0;
  logic [1:0] in_slot = 0, out_slot;
  data_t in_feat [P][S][C];
  logic out_valid, out_first, out_last, out_mode;
  logic [9:0] out_faddr, f_raddr;
  data_t out_feat [P][S][C];
  data_t wgt [S][C];
  logic res_valid;
  acc_t res [P][S];

  dla_pe #(.C_VEC(C), .S_VEC(S), .P_VEC(P), .FADDR_W(10)) dut (.clk, .rst_n,
    .in_valid, .in_first, .in_last, .in_mode1x1(in_mode), .in_faddr, .in_slot, .in_feat,
    .out_valid, .out_first, .out_last, .out_mode1x1(out_mode), .out_faddr, .out_slot, .out_feat,
    .f_raddr, .wgt, .res_valid, .res);

  // weight memory indexed by address, read one cycle after f_raddr
  data_t wmem [64][S][C];
  always_ff @(posedge clk) wgt <= wmem[f_raddr[5:0]];

  longint exp_acc [P][S];
  int last_cycle, cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  initial begin
    for (int a = 0; a < 64; a++) for (int s = 0; s < S; s++) for (int c = 0; c < C; c++)
      wmem[a][s][c] = data_t'($urandom_range(0, 2000)) - 16'sd1000;
    for (int p = 0; p < P; p++) for (int s = 0; s < S; s++) for (int c = 0; c < C; c++) in_feat[p][s][c] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int g = 0; g < 40; g++) begin
      automatic int n = $urandom_range(1, 5);
      automatic logic mode = g[0];
      for (int p = 0; p < P; p++) for (int s = 0; s < S; s++) exp_acc[p][s] = 0;
      for (int t = 0; t < n; t++) begin
        automatic int a = $urandom_range(0, 63);
        @(negedge clk);
        in_valid = 1; in_first = (t == 0); in_last = (t == n-1); in_mode = mode; in_faddr = 10'(a);
        in_slot = mode ? 2'($urandom_range(0, S-1)) : 2'd0;
        for (int p = 0; p < P; p++) for (int s = 0; s < S; s++) for (int c = 0; c < C; c++)
          in_feat[p][s][c] = data_t'($urandom_range(0, 4000)) - 16'sd2000;
        for (int p = 0; p < P; p++) for (int s = 0; s < S; s++) for (int c = 0; c < C; c++) begin
          if (mode) exp_acc[p][s] += longint'(in_feat[p][s][c]) * longint'(wmem[a][in_slot][c]);
          else      exp_acc[p][0] += longint'(in_feat[p][s][c]) * longint'(wmem[a][s][c]);
        end
        if (t == n-1) last_cycle = cyc;
        @(posedge clk); #1;
        checks++;
        if (!out_valid || out_faddr != 10'(a) || out_feat[1][2][7] != in_feat[1][2][7] || out_last != (t == n-1)) begin
          failures++; $display("forwarding wrong at group %0d", g);
        end
      end
      in_valid = 0; in_first = 0; in_last = 0;
      // wait for the result, sampling just after each rising edge
      while (!res_valid) begin @(posedge clk); #1; end
      checks++;
      if (cyc - last_cycle != 3) begin failures++; $display("latency %0d", cyc - last_cycle); end
      for (int p = 0; p < P; p++) for (int s = 0; s < S; s++) begin
        checks++;
        if (res[p][s] != acc_t'(exp_acc[p][s])) begin
          failures++; $display("g%0d p%0d s%0d mode%0d got %0d exp %0d", g, p, s, mode, res[p][s], exp_acc[p][s]);
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
