// tb_width_adapter: three adapters in a loop of sorts: 8 lanes to 2 (split),
// 2 lanes to 8 (gather) fed from the split output, and 4 to 4 (register
// stage). 200 random words go in with random gaps and random back-pressure
// at the end. Checks each split beat's lanes, coordinate and beat number,
// that the gathered words equal the original words in order, and that the
// 4-lane stage passes words unchanged and in order.
module tb_width_adapter;
  import dla_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  typedef struct { data_t d [8]; coord_t c; } w8_t;

  logic iv = 0, ir, nv, nr, gv, gr;
  data_t id [8], nd [2], gd [8]; coord_t ic = '0, nc, gc; logic [7:0] nsub, gsub;
  width_adapter #(.IN_LANES(8), .OUT_LANES(2)) u_split (.clk, .rst_n, .in_valid(iv), .in_data(id),
    .in_coord(ic), .in_ready(ir), .out_valid(nv), .out_data(nd), .out_coord(nc), .out_sub(nsub), .out_ready(nr));
  width_adapter #(.IN_LANES(2), .OUT_LANES(8)) u_gather (.clk, .rst_n, .in_valid(nv), .in_data(nd),
    .in_coord(nc), .in_ready(nr), .out_valid(gv), .out_data(gd), .out_coord(gc), .out_sub(gsub), .out_ready(gr));

  logic ev = 0, er, fv, fr; data_t ed [4], fd [4]; coord_t ec = '0, fc; logic [7:0] fsub;
  width_adapter #(.IN_LANES(4), .OUT_LANES(4)) u_eq (.clk, .rst_n, .in_valid(ev), .in_data(ed),
    .in_coord(ec), .in_ready(er), .out_valid(fv), .out_data(fd), .out_coord(fc), .out_sub(fsub), .out_ready(fr));

  always_ff @(posedge clk) begin gr <= ($urandom % 3) != 0; fr <= ($urandom % 3) != 0; end

  w8_t sent [$], beatq [$];
  int beat = 0, eqn = 0, eqgot = 0, ngot = 0;
  always_ff @(posedge clk) if (rst_n) begin
    if (nv && nr) begin
      checks++;
      if (beatq.size() == 0 || nsub != 8'(beat) || nc != beatq[0].c
          || nd[0] != beatq[0].d[2*beat] || nd[1] != beatq[0].d[2*beat+1]) begin
        failures++; $display("split beat %0d wrong", beat);
      end
      if (beat == 3) begin beat = 0; if (beatq.size() > 0) void'(beatq.pop_front()); end else beat++;
    end
    if (gv && gr) begin
      checks++;
      if (sent.size() == 0 || gd != sent[0].d || gc != sent[0].c) begin failures++; $display("gathered word %0d wrong", ngot); end
      if (sent.size() > 0) void'(sent.pop_front());
      ngot++;
    end
    if (fv && fr) begin
      checks++;
      if (fd[0] != data_t'(eqgot) || fd[3] != data_t'(eqgot * 3) || fc.w != 16'(eqgot)) begin
        failures++; $display("equal-width word %0d wrong", eqgot);
      end
      eqgot++;
    end
  end

  initial begin
    for (int c = 0; c < 8; c++) id[c] = '0;
    for (int c = 0; c < 4; c++) ed[c] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    fork
      for (int n = 0; n < 200; n++) begin
        w8_t w;
        while ($urandom % 3 == 0) @(negedge clk);
        for (int c = 0; c < 8; c++) w.d[c] = data_t'($urandom);
        w.c = '{cb: 16'($urandom), h: 16'($urandom), w: 16'(n)};
        @(negedge clk);
        iv = 1; id = w.d; ic = w.c;
        sent.push_back(w); beatq.push_back(w);
        @(posedge clk); while (!ir) @(posedge clk);
        @(negedge clk); iv = 0;
      end
      for (int n = 0; n < 200; n++) begin
        @(negedge clk);
        ev = 1; ed[0] = data_t'(n); ed[3] = data_t'(n * 3); ec = '{cb: 16'd0, h: 16'd0, w: 16'(n)};
        @(posedge clk); while (!er) @(posedge clk);
        @(negedge clk); ev = 0;
      end
    join
    repeat (40) @(negedge clk);
    checks++; if (ngot != 200 || eqgot != 200) begin failures++; $display("got %0d gathered, %0d equal", ngot, eqgot); end
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
