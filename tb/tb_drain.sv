// tb_drain: checks the drain alone (C_VEC=4, S_VEC=3, P_VEC=2, K_VEC=8).
// Groups of random accumulator values are presented as landed PE results;
// output is accepted with random back-pressure. Expected words are worked
// out in the testbench: order row, lane, channel block; value = acc >>> 8
// saturated, ReLU when enabled; words past OH/OW/KCB dropped. Also checks
// that take is given once per group and that idle returns at the end.
module tb_drain;
  import dla_pkg::*;
  localparam int C = 4, S = 3, P = 2, K = 8, NCB = K / C;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic gv = 0; acc_t res [K][P][S];
  logic [15:0] gkg = 0, goh = 0, gow = 0, OH, OW, KCB;
  logic mode1x1 = 0, relu = 0, take, idle, ov, ordy;
  data_t od [C]; coord_t oc;

  drain #(.C_VEC(C), .S_VEC(S), .P_VEC(P), .K_VEC(K)) dut (.clk, .rst_n, .grp_valid(gv), .res,
    .grp_kg(gkg), .grp_oh(goh), .grp_ow(gow), .mode1x1, .relu, .OH, .OW, .KCB, .take, .idle,
    .out_valid(ov), .out_data(od), .out_coord(oc), .out_ready(ordy));
  always_ff @(posedge clk) ordy <= ($urandom % 3) != 0;

  typedef struct { coord_t c; data_t d [C]; } word_t;
  word_t expq [$];
  int takes = 0;
  always_ff @(posedge clk) if (rst_n) begin
    if (take) takes++;
    if (ov && ordy) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected word"); end
      else begin
        word_t e;
        e = expq.pop_front();
        if (oc != e.c || od != e.d) begin
          failures++; $display("word cb%0d h%0d w%0d got cb%0d h%0d w%0d d0 %0d exp %0d", e.c.cb, e.c.h, e.c.w,
                               oc.cb, oc.h, oc.w, od[0], e.d[0]);
        end
      end
    end
  end

  initial begin
    OH = 5; OW = 4; KCB = 3;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int g = 0; g < 24; g++) begin
      automatic int kg = g % 2, oh = (g / 2) % 3 * 2, ow = (g / 6) * 3 % 6;
      @(negedge clk);
      mode1x1 = (g >= 12); relu = g[0];
      gkg = 16'(kg); goh = 16'(oh); gow = 16'(ow);
      for (int k = 0; k < K; k++) for (int p = 0; p < P; p++) for (int s = 0; s < S; s++)
        res[k][p][s] = acc_t'($urandom_range(0, 32'h00ff_ffff)) - acc_t'(32'h0080_0000)
                       + ((k == 0 && p == 0) ? acc_t'(48'sd1 <<< 30) : '0);  // one saturating value
      for (int p = 0; p < P; p++) for (int l = 0; l < (mode1x1 ? S : 1); l++) for (int ci = 0; ci < NCB; ci++) begin
        word_t w;
        w.c = '{cb: 16'(kg*NCB + ci), h: 16'(oh + p), w: 16'(ow + l)};
        for (int c = 0; c < C; c++) begin
          longint v;
          v = longint'(res[ci*C + c][p][l]) >>> 8;
          if (v > 32767) v = 32767; else if (v < -32768) v = -32768;
          if (relu && v < 0) v = 0;
          w.d[c] = data_t'(v);
        end
        if (kg*NCB + ci < 3 && oh + p < 5 && ow + l < 4) expq.push_back(w);
      end
      gv = 1; @(negedge clk); gv = 0;
      while (!idle) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("%0d words missing", expq.size()); end
    checks++; if (takes != 24) begin failures++; $display("takes %0d", takes); end
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
