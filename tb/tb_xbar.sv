// tb_xbar: checks the Xbar's routing (C_VEC=8, LRN_VEC=2). Four source
// selections are tried in turn: drain -> writer; drain -> pool and pool ->
// writer; drain -> LSTM and LSTM -> writer; drain -> LRN and LRN -> writer.
// The testbench plays every producer and consumer: the pool and LSTM
// "kernels" here pass each word on unchanged, and the LRN kernel model
// echoes each narrow beat back one cycle later with its coordinate. 60
// words per selection must arrive at the writer in order and unchanged
// under random back-pressure, and consumers that were not selected must
// never see a valid word.
module tb_xbar;
  import dla_pkg::*;
  localparam int C = 8, L = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  xsrc_e pool_src = SRC_NONE, lstm_src = SRC_NONE, lrn_src = SRC_NONE, wr_src = SRC_NONE;
  logic dv = 0, dr, pov, por, lov, lor, rov, ror, piv, pir, liv, lir, riv, rir, wv, wr;
  data_t dd [C], pod [C], lod [C], rod [L], pid [C], lid [C], rid [L], wd [C];
  coord_t dc = '0, poc, loc, roc, pic, lic, ric, wc; logic [7:0] rsub;

  xbar #(.C_VEC(C), .LRN_VEC(L)) dut (.clk, .rst_n, .pool_src, .lstm_src, .lrn_src, .wr_src,
    .drain_valid(dv), .drain_data(dd), .drain_coord(dc), .drain_ready(dr),
    .pool_o_valid(pov), .pool_o_data(pod), .pool_o_coord(poc), .pool_o_ready(por),
    .lstm_o_valid(lov), .lstm_o_data(lod), .lstm_o_coord(loc), .lstm_o_ready(lor),
    .lrn_o_valid(rov), .lrn_o_data(rod), .lrn_o_coord(roc), .lrn_o_ready(ror),
    .pool_i_valid(piv), .pool_i_data(pid), .pool_i_coord(pic), .pool_i_ready(pir),
    .lstm_i_valid(liv), .lstm_i_data(lid), .lstm_i_coord(lic), .lstm_i_ready(lir),
    .lrn_i_valid(riv), .lrn_i_data(rid), .lrn_i_coord(ric), .lrn_i_sub(rsub), .lrn_i_ready(rir),
    .wr_valid(wv), .wr_data(wd), .wr_coord(wc), .wr_ready(wr));

  // pool and LSTM stand-ins: wires straight through
  assign pov = piv; assign pod = pid; assign poc = pic; assign pir = por;
  assign lov = liv; assign lod = lid; assign loc = lic; assign lir = lor;
  // LRN stand-in: one-entry register
  assign rir = !rov || ror;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rov <= 1'b0;
    else if (rir) begin rov <= riv; rod <= rid; roc <= ric; end
  always_ff @(posedge clk) wr <= ($urandom % 3) != 0;

  data_t sent [$][C];
  int n_in = 0, n_out = 0;
  always_ff @(posedge clk) if (rst_n) begin
    if (wv && wr) begin
      checks++;
      if (sent.size() == 0 || wd != sent[0] || wc.w != 16'(n_out)) begin failures++; $display("word %0d wrong", n_out); end
      if (sent.size() > 0) void'(sent.pop_front());
      n_out++;
    end
    if ((piv && pool_src == SRC_NONE) || (liv && lstm_src == SRC_NONE) || (riv && lrn_src == SRC_NONE)) begin
      failures++; $display("unselected consumer saw valid");
    end
  end

  task automatic run(xsrc_e ps, xsrc_e ls, xsrc_e rs, xsrc_e ws);
    @(negedge clk);
    pool_src = ps; lstm_src = ls; lrn_src = rs; wr_src = ws;
    for (int n = 0; n < 60; n++) begin
      data_t w [C];
      while ($urandom % 4 == 0) @(negedge clk);
      for (int c = 0; c < C; c++) w[c] = data_t'($urandom);
      dv = 1; dd = w; dc = '{cb: 16'd0, h: 16'd0, w: 16'(n_in)};
      sent.push_back(w); n_in++;
      @(posedge clk); while (!dr) @(posedge clk);
      @(negedge clk); dv = 0;
    end
    while (n_out < n_in) @(negedge clk);
    n_in = 0; n_out = 0;
  endtask

  initial begin
    for (int c = 0; c < C; c++) dd[c] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    run(SRC_NONE, SRC_NONE, SRC_NONE, SRC_DRAIN);
    run(SRC_DRAIN, SRC_NONE, SRC_NONE, SRC_POOL);
    run(SRC_NONE, SRC_DRAIN, SRC_NONE, SRC_LSTM);
    run(SRC_NONE, SRC_NONE, SRC_DRAIN, SRC_LRN);
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
