// tb_vliw_transport: checks one ring stop (KID 3). A byte stream holding
// blocks for kernels 1, 3, 5 and 3 again, with filler bytes, is pushed in
// with random gaps; the kernel side accepts instructions only at random
// times, so the instruction queue (depth 4) fills and the ring must stall.
// Checks: every byte leaves unchanged and in order; exactly the
// instructions of the two KID-3 blocks reach the kernel, assembled
// little-endian and in order; the ring stalled at least once.
module tb_vliw_transport;
  import dla_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready, instr_valid, instr_ready;
  logic [7:0] in_data, out_data;
  instr_t instr_data;

  vliw_transport #(.KID(8'h03), .FIFO_DEPTH(4)) dut (.clk, .rst_n, .in_valid, .in_data, .in_ready,
    .out_valid, .out_data, .out_ready, .instr_valid, .instr_data, .instr_ready);

  byte unsigned stream [$];
  instr_t exp_instr [$];
  task automatic add_block(input byte unsigned kid, input int n, input int seed);
    stream.push_back(kid); stream.push_back(byte'(n));
    for (int i = 0; i < n; i++) begin
      instr_t w = 32'(seed) * 32'h9E37_79B9 + 32'(i) * 32'h0102_0304;
      for (int b = 0; b < 4; b++) stream.push_back(w[8*b +: 8]);
      if (kid == 3) exp_instr.push_back(w);
    end
  endtask

  int ip = 0, op = 0, stalls = 0;
  always_ff @(posedge clk) begin
    out_ready   <= ($urandom % 5) != 0;
    instr_ready <= ($urandom % 12) == 0;
  end
  always_ff @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      ip++;
    end
    if (in_valid && !in_ready && out_ready) stalls++;
    if (out_valid && out_ready) begin
      checks++;
      if (out_data !== stream[op]) begin failures++; $display("ring byte %0d got %h exp %h", op, out_data, stream[op]); end
      op++;
    end
    if (instr_valid && instr_ready) begin
      checks++;
      if (exp_instr.size() == 0) begin failures++; $display("unexpected instruction %h", instr_data); end
      else begin
        instr_t e;
        e = exp_instr.pop_front();
        if (instr_data !== e) begin failures++; $display("instr got %h exp %h", instr_data, e); end
      end
    end
  end
  always_comb begin
    in_valid = rst_n && (ip < stream.size());
    in_data  = (ip < stream.size()) ? stream[ip] : 8'h00;
  end

  initial begin
    add_block(1, 5, 1); stream.push_back(0); add_block(3, 9, 2); add_block(5, 0, 3);
    stream.push_back(0); stream.push_back(0); add_block(3, 6, 4); add_block(5, 3, 5);
    repeat (3) @(posedge clk); rst_n = 1;
    wait (op == stream.size() && exp_instr.size() == 0);
    repeat (5) @(posedge clk);
    checks++; if (stalls == 0) begin failures++; $display("ring never stalled"); end
    checks++; if (instr_valid) begin failures++; $display("extra instruction"); end
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog op=%0d left=%0d", op, exp_instr.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
