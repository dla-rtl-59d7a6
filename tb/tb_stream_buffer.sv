// tb_stream_buffer: random writes and reads on a 1024-word buffer with
// three read ports, compared against a testbench copy of the contents;
// reads have one cycle of latency and a write is visible to reads from the
// next cycle on.
module tb_stream_buffer;
  import dla_pkg::*;
  localparam int D = 1024, L = 4, NR = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rd_en [NR];
  logic [9:0] rd_addr [NR];
  logic [L*DATA_W-1:0] rd_data [NR];
  logic we = 0;
  logic [9:0] waddr = 0;
  logic [L*DATA_W-1:0] wdata = 0;
  logic [L*DATA_W-1:0] model [D];
  logic [L*DATA_W-1:0] expq [NR];

  stream_buffer #(.DEPTH(D), .LANES(L), .N_RD(NR)) dut (.clk, .rd_en, .rd_addr, .rd_data,
    .we, .waddr, .wdata);

  initial begin
    for (int i = 0; i < NR; i++) begin rd_en[i] = 0; rd_addr[i] = 0; end
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 10'(a); wdata = {$urandom, $urandom}; model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      for (int i = 0; i < NR; i++) begin
        rd_en[i] = 1; rd_addr[i] = 10'($urandom); expq[i] = model[rd_addr[i]];
      end
      we = $urandom % 2; waddr = 10'($urandom); wdata = {$urandom, $urandom};
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      for (int i = 0; i < NR; i++) begin
        checks++;
        if (rd_data[i] !== expq[i]) begin failures++; $display("port %0d addr %0d wrong", i, rd_addr[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
