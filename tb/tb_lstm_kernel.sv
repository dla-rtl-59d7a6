// tb_lstm_kernel: three time steps of a 20-unit LSTM cell (C_VEC=8, two
// units per input word, so the last output word is partial). Gate
// pre-activations are random in [-6, 6); the reference is written here in
// real arithmetic from the cell equations and the piecewise-linear curves
// (sigmoid: 1 beyond |x| = 5, slopes 1/32, 1/8, 1/4 with breakpoints 2.375
// and 1; tanh(x) = 2 sigmoid(2x) - 1), keeps its own cell state across the
// steps (cleared in step 0) and allows 6/256 of rounding error. Input is
// sent with random gaps and output taken with random back-pressure;
// output coordinates, word count and one finish per step are also checked.
module tb_lstm_kernel;
  import dla_pkg::*;
  localparam int C = 8, U = 20, NW = U / 2, NO = (U + C - 1) / C;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, finish, clear = 0, in_valid = 0, in_ready, out_valid, out_ready;
  data_t in_data [C], out_data [C]; coord_t in_coord = '0, out_coord;

  lstm_kernel #(.C_VEC(C), .MAX_UNITS(64)) dut (.clk, .rst_n, .start, .finish, .clear,
    .n_units(16'(U)), .in_valid, .in_data, .in_coord, .in_ready, .out_valid, .out_data,
    .out_coord, .out_ready);

  function automatic real sg(real x);
    real a, y;
    a = (x < 0) ? -x : x;
    if (a >= 5.0) y = 1.0;
    else if (a >= 2.375) y = a / 32.0 + 0.84375;
    else if (a >= 1.0) y = a / 8.0 + 0.625;
    else y = a / 4.0 + 0.5;
    return (x < 0) ? 1.0 - y : y;
  endfunction
  function automatic real th(real x);
    if (x > 127.0) x = 127.0; else if (x < -128.0) x = -128.0;
    return 2.0 * sg(2.0 * x) - 1.0;
  endfunction

  real cst [U];
  real hexp [U];
  int nout = 0, fins = 0;
  always_ff @(posedge clk) out_ready <= ($urandom % 3) != 0;
  always_ff @(posedge clk) if (rst_n && finish) fins++;
  always_ff @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (out_coord.cb != 16'(nout) || out_coord.h != 0 || out_coord.w != 0) begin
      failures++; $display("output word %0d has cb %0d", nout, out_coord.cb);
    end
    for (int c = 0; c < C; c++) if (nout*C + c < U) begin
      real g, e;
      g = real'(out_data[c]) / 256.0;
      e = hexp[nout*C + c];
      checks++;
      if (g - e > 6.0/256 || e - g > 6.0/256) begin
        failures++; $display("unit %0d: got %f exp %f", nout*C + c, g, e);
      end
    end
    nout++;
  end

  initial begin
    for (int c = 0; c < C; c++) in_data[c] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      clear = (t == 0); nout = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (int w = 0; w < NW; w++) begin
        while ($urandom % 3 == 0) @(negedge clk);
        in_valid = 1; in_coord = '{cb: 16'(w), h: 16'd0, w: 16'd0};
        for (int c = 0; c < C; c++) in_data[c] = data_t'($urandom_range(0, 3071)) - data_t'(1536);
        for (int u = 0; u < 2; u++) begin
          real gi, gg, gf, go, cp;
          int j;
          j = w*2 + u;
          gi = real'(in_data[4*u]) / 256.0; gg = real'(in_data[4*u+1]) / 256.0;
          gf = real'(in_data[4*u+2]) / 256.0; go = real'(in_data[4*u+3]) / 256.0;
          cp = (t == 0) ? 0.0 : cst[j];
          cst[j] = sg(gf) * cp + sg(gi) * th(gg);
          hexp[j] = sg(go) * th(cst[j]);
        end
        @(posedge clk); while (!in_ready) @(posedge clk);
        @(negedge clk); in_valid = 0;
      end
      while (fins <= t) @(negedge clk);
      checks++; if (nout != NO) begin failures++; $display("step %0d: %0d output words", t, nout); end
    end
    repeat (3) @(negedge clk);
    checks++; if (fins != 3) begin failures++; $display("finish count %0d", fins); end
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
