// lstm_kernel: streaming element-wise stage of an LSTM cell.
//
// The compiler merges the eight LSTM matrix products into one matrix and
// interleaves its rows so that the PE array produces, for every hidden unit
// j, the four gate pre-activations next to each other in the order input
// (i), cell candidate (g), forget (f), output (o). A drain word of C_VEC
// channels therefore holds C_VEC/4 hidden units: lanes 4u..4u+3 of word cb
// belong to unit j = cb*(C_VEC/4) + u. Per unit this kernel computes
//   c_t = sigmoid(f)*c_{t-1} + sigmoid(i)*tanh(g)
//   h_t = sigmoid(o)*tanh(c_t)
// keeps c_t in a cell-state memory for the next time step, and gathers the
// h_t values into output words of C_VEC units (output word j / C_VEC,
// coordinate (cb, h, w) = (j / C_VEC, 0, 0)). With clear set, c_{t-1} is
// taken as 0 (first time step). One input word per cycle; an output word
// leaves after every C_VEC/(C_VEC/4) = 4 input words and after the last
// unit. in_ready does not depend on out_ready. sigmoid and tanh are the
// piecewise-linear functions of dla_pkg. The output row and column are
// always 0 (an LSTM vector is a 1x1 tensor), so those coordinate bits are
// constant.
// The gate order and the streaming (no gate buffering) follow the paper;
// the nonlinearity approximation and number format are this design's own.
module lstm_kernel
  import dla_pkg::*;
#(
  parameter int C_VEC     = 8,
  parameter int MAX_UNITS = 2048
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic finish,
  input  logic        clear,
  input  logic [15:0] n_units,
  input  logic   in_valid,
  input  data_t  in_data [C_VEC],
  input  coord_t in_coord,
  output logic   in_ready,
  output logic   out_valid,
  output data_t  out_data [C_VEC],
  output coord_t out_coord,
  input  logic   out_ready
);
  localparam int UPW = C_VEC / 4;               // units per input word
  localparam int CW  = MAX_UNITS / UPW;          // cell-state words
  localparam int CA  = $clog2(CW);

  logic [UPW*DATA_W-1:0] cmem [CW];
  logic active;
  logic [15:0] done_units;
  data_t gath [C_VEC];

  wire [CA-1:0] ca = CA'(in_coord.cb);

  data_t c_new [UPW];
  data_t h_new [UPW];
  always_comb begin
    for (int u = 0; u < UPW; u++) begin
      data_t ig, gg, fg, og, cp;
      ig = sigmoid(in_data[4*u+0]);
      gg = tanh_f (in_data[4*u+1]);
      fg = sigmoid(in_data[4*u+2]);
      og = sigmoid(in_data[4*u+3]);
      cp = clear ? '0 : data_t'(cmem[ca][u*DATA_W +: DATA_W]);
      c_new[u] = sat(ACC_W'(fmul(fg, cp)) + ACC_W'(fmul(ig, gg)));
      h_new[u] = fmul(og, tanh_f(c_new[u]));
    end
  end

  wire [15:0] j0 = in_coord.cb * 16'(UPW);   // first unit of this word
  wire [15:0] jl = j0 + 16'(UPW - 1);        // last unit of this word
  wire emit = ((jl % 16'(C_VEC)) == 16'(C_VEC - 1)) || (jl >= n_units - 1);
  // a word that completes an output word waits until the output register is
  // free; in_ready does not depend on out_ready, so no combinational path
  // runs through the kernel
  assign in_ready = active && (!out_valid || !emit);
  wire take = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (take) begin
      logic [UPW*DATA_W-1:0] w;
      for (int u = 0; u < UPW; u++) w[u*DATA_W +: DATA_W] = c_new[u];
      cmem[ca] <= w;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; done_units <= '0; finish <= 1'b0; out_valid <= 1'b0; out_coord <= '0;
      for (int c = 0; c < C_VEC; c++) begin gath[c] <= '0; out_data[c] <= '0; end
    end else begin
      finish <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (start) begin
        active <= (n_units != 0); done_units <= '0; finish <= (n_units == 0);
      end else if (take) begin
        data_t g [C_VEC];
        g = gath;
        for (int u = 0; u < UPW; u++) g[(int'(j0) + u) % C_VEC] = h_new[u];
        gath <= g;
        done_units <= done_units + 16'(UPW);
        if (emit) begin
          out_valid <= 1'b1;
          out_data  <= g;
          out_coord <= '{cb: j0 / 16'(C_VEC), h: '0, w: '0};
        end
        if (done_units + 16'(UPW) >= n_units) active <= 1'b0;
      end
      if (!active && !start && done_units != 0 && done_units >= n_units && !out_valid
          && !finish) begin
        finish <= 1'b1; done_units <= '0;
      end
    end
  end
endmodule
