// tb_filter_loader: loads 5 words for each of 6 PEs from a memory model
// that grants at random and answers after three cycles. Every filter-cache
// write must go to the right PE and address with the right data, each
// exactly once, followed by one finish pulse. A second run with zero words
// must finish at once.
module tb_filter_loader;
  import dla_pkg::*;
  localparam int C = 4, S = 3, K = 8, FD = 16, WW = S*C*DATA_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, finish, rd_req, rd_gnt, rd_valid, fc_we;
  logic [31:0] rd_addr, wpp = 5;
  logic [WW-1:0] rd_data, fc_wdata;
  logic [2:0] fc_sel; logic [3:0] fc_waddr;

  filter_loader #(.C_VEC(C), .S_VEC(S), .K_VEC(K), .FC_DEPTH(FD)) dut (.clk, .rst_n, .start, .finish,
    .ext_base(32'd200), .words_per_pe(wpp), .num_pe(32'd6), .rd_req, .rd_addr, .rd_gnt,
    .rd_valid, .rd_data, .fc_we, .fc_sel, .fc_waddr, .fc_wdata);

  function automatic logic [WW-1:0] mem(input logic [31:0] a);
    return {6{a * 32'h0101_0101 + 32'h5a}};
  endfunction
  logic [2:0] pv; logic [31:0] pa [3];
  always_ff @(posedge clk) rd_gnt <= ($urandom % 3) != 0;
  always_ff @(posedge clk) begin
    pv <= {pv[1:0], rd_req & rd_gnt};
    pa[0] <= rd_addr; pa[1] <= pa[0]; pa[2] <= pa[1];
  end
  assign rd_valid = pv[2];
  assign rd_data  = mem(pa[2]);

  int seen [8][16];
  int fins = 0;
  always_ff @(posedge clk) if (rst_n) begin
    if (finish) fins++;
    if (fc_we) begin
      seen[fc_sel][fc_waddr]++;
      checks++;
      if (fc_wdata !== mem(32'(200 + int'(fc_sel)*5 + int'(fc_waddr)))) begin
        failures++; $display("pe %0d addr %0d wrong data", fc_sel, fc_waddr);
      end
    end
  end

  initial begin
    pv = 0;
    foreach (seen[i, j]) seen[i][j] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (fins == 0) @(negedge clk);
    repeat (5) @(negedge clk);
    foreach (seen[i, j]) begin
      checks++;
      if (seen[i][j] != ((i < 6 && j < 5) ? 1 : 0)) begin failures++; $display("pe %0d addr %0d written %0d times", i, j, seen[i][j]); end
    end
    checks++; if (fins != 1) begin failures++; $display("finish %0d", fins); end
    wpp = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    @(negedge clk);
    checks++; if (fins != 2) begin failures++; $display("empty load did not finish"); end
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
