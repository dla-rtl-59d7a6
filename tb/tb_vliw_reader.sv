// tb_vliw_reader: checks the VLIW reader. A 64-word program is placed in a
// memory model with a two-cycle read latency; the ring behind the reader is
// modelled as a three-stage delay line whose input stalls at random. The
// bytes on the ring must be the program words, least significant byte
// first, in order; done must pulse once, after the last byte has come back.
module tb_vliw_reader;
  import dla_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done;
  logic mem_req, mem_gnt, mem_rvalid;
  logic [31:0] mem_addr, mem_rdata;
  logic ring_out_valid, ring_out_ready, ring_in_valid;
  logic [7:0] ring_out_data, ring_in_data;

  vliw_reader dut (.clk, .rst_n, .start, .base(32'd100), .n_words(32'd64), .busy, .done,
    .mem_req, .mem_addr, .mem_gnt, .mem_rvalid, .mem_rdata,
    .ring_out_valid, .ring_out_data, .ring_out_ready, .ring_in_valid, .ring_in_data);

  logic [31:0] mem [256];
  initial for (int i = 0; i < 256; i++) mem[i] = 32'h1000_0000 * (i % 7) + i * 32'h0101_0301 + 5;

  // memory: grant always, data two cycles later
  logic [1:0] pv; logic [31:0] pa [2];
  assign mem_gnt = 1'b1;
  always_ff @(posedge clk) begin
    pv <= {pv[0], mem_req & mem_gnt};
    pa[0] <= mem_addr; pa[1] <= pa[0];
  end
  assign mem_rvalid = pv[1];
  assign mem_rdata  = mem[pa[1][7:0]];

  // ring: random stalls, three-cycle return path
  always_ff @(posedge clk) ring_out_ready <= ($urandom % 4) != 0;
  logic [2:0] dv; logic [7:0] dd [3];
  always_ff @(posedge clk) begin
    dv <= {dv[1:0], ring_out_valid & ring_out_ready};
    dd[0] <= ring_out_data; dd[1] <= dd[0]; dd[2] <= dd[1];
  end
  assign ring_in_valid = dv[2];
  assign ring_in_data  = dd[2];

  int nbytes = 0, ndone = 0, nback = 0;
  always_ff @(posedge clk) if (rst_n) begin
    if (ring_out_valid && ring_out_ready) begin
      logic [7:0] exp_b;
      exp_b = mem[100 + nbytes/4][8*(nbytes%4) +: 8];
      checks++;
      if (ring_out_data !== exp_b) begin
        failures++; $display("byte %0d: got %h exp %h", nbytes, ring_out_data, exp_b);
      end
      nbytes++;
    end
    if (ring_in_valid) nback++;
    if (done) begin
      ndone++;
      checks++;
      if (nback != 256) begin failures++; $display("done before all bytes returned (%0d)", nback); end
    end
  end

  initial begin
    pv = 0; dv = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    wait (ndone == 1);
    repeat (20) @(posedge clk);
    checks++; if (nbytes != 256) begin failures++; $display("bytes sent %0d", nbytes); end
    checks++; if (ndone != 1 || busy) begin failures++; $display("done count %0d busy %0d", ndone, busy); end
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
