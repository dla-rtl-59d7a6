// tb_filter_cache: writes distinct patterns into both banks of a 64-word
// filter cache, then reads every word of each bank (one-cycle latency) and
// compares; also checks that writing one bank while the other is read does
// not disturb the bank being read.
module tb_filter_cache;
  import dla_pkg::*;
  localparam int C = 8, S = 3, D = 64, WW = S*C*DATA_W;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0, wbank = 0, rbank = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [WW-1:0] wdata = '0;
  data_t rdata [S][C];

  filter_cache #(.C_VEC(C), .S_VEC(S), .DEPTH(D)) dut (.clk, .we, .wbank, .waddr, .wdata,
    .rbank, .raddr, .rdata);

  function automatic logic [WW-1:0] pat(input int b, input int a);
    logic [WW-1:0] v;
    for (int i = 0; i < S*C; i++) v[i*DATA_W +: DATA_W] = 16'(b * 7919 + a * 131 + i * 17);
    return v;
  endfunction

  task automatic check_bank(input int b);
    for (int a = 0; a < D; a++) begin
      @(negedge clk); rbank = b[0]; raddr = 6'(a);
      @(posedge clk); #1;
      for (int s = 0; s < S; s++) for (int c = 0; c < C; c++) begin
        logic [WW-1:0] e = pat(b, a);
        checks++;
        if (rdata[s][c] !== data_t'(e[(s*C+c)*DATA_W +: DATA_W])) begin
          failures++; $display("bank %0d addr %0d s%0d c%0d wrong", b, a, s, c);
        end
      end
    end
  endtask

  initial begin
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk); we = 1; wbank = b[0]; waddr = 6'(a); wdata = pat(b, a);
      end
    @(negedge clk); we = 0;
    check_bank(0);
    check_bank(1);
    // rewrite bank 0 with bank-2 patterns while reading bank 1
    fork
      for (int a = 0; a < D; a++) begin
        @(negedge clk); we = 1; wbank = 0; waddr = 6'(a); wdata = pat(2, a);
      end
      check_bank(1);
    join
    @(negedge clk); we = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); rbank = 0; raddr = 6'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata[2][7] !== data_t'(16'(2 * 7919 + a * 131 + 23 * 17))) begin
        failures++; $display("rewritten bank 0 addr %0d wrong", a);
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
