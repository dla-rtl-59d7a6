// tb_stream_writer: sends a 3x4x5 tensor (channel blocks x rows x columns)
// of coordinate-tagged words in shuffled order with random gaps and checks
// each write address (base + (cb*OH + h)*OW + w), the data, the word count
// and the single finish pulse after the last word; also that the writer
// ignores input before it is started.
module tb_stream_writer;
  import dla_pkg::*;
  localparam int C = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, finish, in_valid = 0, in_ready, we;
  data_t in_data [C]; coord_t in_coord = '0;
  logic [11:0] waddr; logic [C*DATA_W-1:0] wdata; logic [31:0] nw;

  stream_writer #(.C_VEC(C), .SB_DEPTH(4096)) dut (.clk, .rst_n, .start, .finish, .base(32'd1000),
    .OH(16'd4), .OW(16'd5), .n_words(32'd60), .in_valid, .in_data, .in_coord, .in_ready,
    .we, .waddr, .wdata, .words_written(nw));

  int fins = 0;
  always_ff @(posedge clk) if (rst_n && finish) fins++;

  initial begin
    coord_t order [$];
    for (int c = 0; c < C; c++) in_data[c] = '0;
    for (int b = 0; b < 3; b++) for (int h = 0; h < 4; h++) for (int w = 0; w < 5; w++)
      order.push_back('{cb: 16'(b), h: 16'(h), w: 16'(w)});
    order.shuffle();
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); in_valid = 1;
    @(posedge clk); #1;
    checks++; if (we || in_ready) begin failures++; $display("writer active before start"); end
    @(negedge clk); in_valid = 0; start = 1; @(negedge clk); start = 0;
    foreach (order[i]) begin
      while ($urandom % 3 == 0) @(negedge clk);
      in_valid = 1; in_coord = order[i];
      for (int c = 0; c < C; c++) in_data[c] = data_t'(order[i].cb * 1000 + order[i].h * 100 + order[i].w * 10 + c);
      #1;
      checks++;
      if (!we || !in_ready || waddr != 12'(1000 + (order[i].cb*4 + order[i].h)*5 + order[i].w)
          || wdata[DATA_W +: DATA_W] != 16'(in_data[1])) begin
        failures++; $display("write %0d wrong: we %0d addr %0d", i, we, waddr);
      end
      @(negedge clk); in_valid = 0;
    end
    repeat (3) @(negedge clk);
    checks++; if (fins != 1 || nw != 60) begin failures++; $display("finish %0d words %0d", fins, nw); end
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
