// tb_pool_kernel: runs the pool kernel (C_VEC=4, DEPTH=256) on a
// 3-block x 6 x 7 input with a 3x3 window, stride 2, padding 1, in groups
// of 2 channel blocks (so the last group is short), first as max pooling
// and then as average pooling. Input words of each group are sent in
// shuffled order with random gaps; the output is taken with random
// back-pressure. Every output word (3 x 3 x 4 of them) is compared with a
// reference computed here: max over the in-range window positions, or the
// sum with padding as 0 times avg_mult >>> 16, saturated. Also checks that
// no word is produced twice or missed and that finish pulses once per run.
module tb_pool_kernel;
  import dla_pkg::*;
  localparam int C = 4, NCB = 3, H = 6, W = 7, OH = 3, OW = 4, WIN = 3, ST = 2, PD = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, finish, avg = 0, in_valid = 0, in_ready, out_valid, out_ready;
  data_t in_data [C], out_data [C]; coord_t in_coord = '0, out_coord;

  pool_kernel #(.C_VEC(C), .DEPTH(256)) dut (.clk, .rst_n, .start, .finish, .avg,
    .H(16'(H)), .W(16'(W)), .CBG(16'd2), .TOTAL_CB(16'(NCB)), .OH(16'(OH)), .OW(16'(OW)),
    .WIN_H(16'(WIN)), .WIN_W(16'(WIN)), .stride(4'(ST)), .pad(4'(PD)), .avg_mult(17'd7282),
    .in_valid, .in_data, .in_coord, .in_ready, .out_valid, .out_data, .out_coord, .out_ready);

  data_t x [NCB][H][W][C];
  int got [NCB][OH][OW];
  int fins = 0;
  always_ff @(posedge clk) out_ready <= ($urandom % 4) != 0;
  always_ff @(posedge clk) if (rst_n && finish) fins++;

  function automatic data_t ref_val(int cb, int oh, int ow, int c, logic a);
    int mx, sum; longint p;
    mx = -32768; sum = 0;
    for (int i = 0; i < WIN; i++) for (int j = 0; j < WIN; j++) begin
      int ih = oh*ST - PD + i, iw = ow*ST - PD + j;
      if (ih >= 0 && ih < H && iw >= 0 && iw < W) begin
        if (int'(x[cb][ih][iw][c]) > mx) mx = x[cb][ih][iw][c];
        sum += x[cb][ih][iw][c];
      end
    end
    p = (longint'(sum) * 7282) >>> 16;
    if (p > 32767) p = 32767; else if (p < -32768) p = -32768;
    return a ? data_t'(p) : data_t'(mx);
  endfunction

  always_ff @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (out_coord.cb >= NCB || out_coord.h >= OH || out_coord.w >= OW) begin
      failures++; $display("bad output coordinate");
    end else begin
      got[out_coord.cb][out_coord.h][out_coord.w]++;
      for (int c = 0; c < C; c++)
        if (out_data[c] != ref_val(out_coord.cb, out_coord.h, out_coord.w, c, avg)) begin
          failures++;
          $display("avg%0d cb%0d oh%0d ow%0d lane %0d: got %0d exp %0d", avg, out_coord.cb, out_coord.h,
                   out_coord.w, c, out_data[c], ref_val(out_coord.cb, out_coord.h, out_coord.w, c, avg));
        end
    end
  end

  task automatic run(logic a);
    coord_t q [$];
    avg = a;
    foreach (got[i, j, k]) got[i][j][k] = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int g = 0; g < NCB; g += 2) begin
      q.delete();
      for (int b = g; b < g + 2 && b < NCB; b++) for (int h = 0; h < H; h++) for (int w = 0; w < W; w++)
        q.push_back('{cb: 16'(b), h: 16'(h), w: 16'(w)});
      q.shuffle();
      foreach (q[i]) begin
        while ($urandom % 4 == 0) @(negedge clk);
        in_valid = 1; in_coord = q[i];
        for (int c = 0; c < C; c++) in_data[c] = x[q[i].cb][q[i].h][q[i].w][c];
        @(posedge clk); while (!in_ready) @(posedge clk);
        @(negedge clk); in_valid = 0;
      end
    end
    while (fins == 0) @(negedge clk);
    fins = 0;
    repeat (3) @(negedge clk);
    foreach (got[i, j, k]) begin
      checks++;
      if (got[i][j][k] != 1) begin failures++; $display("output cb%0d %0d,%0d seen %0d times", i, j, k, got[i][j][k]); end
    end
  endtask

  initial begin
    foreach (x[a, b, c, d]) x[a][b][c][d] = data_t'($urandom_range(0, 65535));
    for (int c = 0; c < C; c++) in_data[c] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    run(0);
    run(1);
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
