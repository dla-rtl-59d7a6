// tb_feature_dma: loads 40 words from a memory model into a stream buffer
// model while the write grant drops at random (the stream writer's
// priority), then stores 25 stream-buffer words back to another external
// area with a random write grant. Both copies are compared word by word,
// the neighbours of each area must be untouched, and finish must pulse
// once per transfer.
module tb_feature_dma;
  import dla_pkg::*;
  localparam int C = 4, WW = C*DATA_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, finish, dir = 0;
  logic [31:0] ext_addr, sb_addr, n_words;
  logic rd_req, rd_gnt, rd_valid, wr_req, wr_gnt, sb_we, sb_wgnt, sb_re;
  logic [31:0] rd_addr, wr_addr;
  logic [WW-1:0] rd_data, wr_data, sb_wdata, sb_rdata;
  logic [9:0] sb_waddr, sb_raddr;

  feature_dma #(.C_VEC(C), .SB_DEPTH(1024)) dut (.clk, .rst_n, .start, .finish, .dir, .ext_addr,
    .sb_addr, .n_words, .rd_req, .rd_addr, .rd_gnt, .rd_valid, .rd_data, .wr_req, .wr_addr,
    .wr_data, .wr_gnt, .sb_we, .sb_waddr, .sb_wdata, .sb_wgnt, .sb_re, .sb_raddr, .sb_rdata);

  logic [WW-1:0] ext [512];
  logic [WW-1:0] sb [1024];
  logic [1:0] pv; logic [31:0] pa [2];
  always_ff @(posedge clk) begin
    rd_gnt  <= ($urandom % 2) != 0;
    wr_gnt  <= ($urandom % 3) != 0;
    sb_wgnt <= ($urandom % 4) != 0;
    pv <= {pv[0], rd_req & rd_gnt};
    pa[0] <= rd_addr; pa[1] <= pa[0];
    if (wr_req && wr_gnt) ext[wr_addr[8:0]] <= wr_data;
    if (sb_we && sb_wgnt) sb[sb_waddr] <= sb_wdata;
    if (sb_re) sb_rdata <= sb[sb_raddr];
  end
  assign rd_valid = pv[1];
  assign rd_data  = ext[pa[1][8:0]];
  int fins = 0;
  always_ff @(posedge clk) if (rst_n && finish) fins++;

  initial begin
    pv = 0;
    for (int i = 0; i < 512; i++) ext[i] = {$urandom, $urandom};
    for (int i = 0; i < 1024; i++) sb[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    ext_addr = 10; sb_addr = 300; n_words = 40; dir = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (fins < 1) @(negedge clk);
    for (int i = 0; i < 40; i++) begin
      checks++; if (sb[300+i] !== ext[10+i]) begin failures++; $display("load word %0d wrong", i); end
    end
    checks++; if (sb[299] !== '0 || sb[340] !== '0) begin failures++; $display("load overran"); end
    for (int i = 0; i < 1024; i++) if (i < 300 || i >= 340) sb[i] = {$urandom, $urandom};
    ext_addr = 400; sb_addr = 600; n_words = 25; dir = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (fins < 2) @(negedge clk);
    for (int i = 0; i < 25; i++) begin
      checks++; if (ext[400+i] !== sb[600+i]) begin failures++; $display("store word %0d wrong", i); end
    end
    checks++; if (ext[399] === sb[599] || ext[425] === sb[625]) begin failures++; $display("store overran"); end
    repeat (3) @(negedge clk);
    checks++; if (fins != 2) begin failures++; $display("finish count %0d", fins); end
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
