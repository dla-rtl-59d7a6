// drain: takes finished output groups out of the PE array and turns them
// into a stream of tensor words for the Xbar.
//
// When the PE array signals that a group has landed (grp_valid) and the
// drain is free, all K_VEC x P_VEC x S_VEC results are copied into the
// drain's own buffer in one cycle (take pulses) so the PEs can go on with
// the next group. The buffer is then sent out one word per cycle: C_VEC
// output channels of one pixel, in the order row p, column lane l, channel
// block. Each result is rescaled from the accumulator format (>>> FRAC,
// saturated to DATA_W) and optionally passed through ReLU. Words outside
// the output tensor (rows >= OH, columns >= OW, channel blocks >= KCB),
// produced when a size is not a multiple of the vector widths, are dropped.
// Every word carries its tensor coordinate (cb, h, w).
// Output: out_valid/out_ready handshake, word registered.
// The drain width of C_VEC channels per cycle and the ReLU (resmodule
// diagrams show ReLU after each convolution) are this design's choices.
module drain
  import dla_pkg::*;
#(
  parameter int C_VEC = 8,
  parameter int S_VEC = 3,
  parameter int P_VEC = 2,
  parameter int K_VEC = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic  grp_valid,
  input  acc_t  res [K_VEC][P_VEC][S_VEC],
  input  logic [15:0] grp_kg, grp_oh, grp_ow,
  input  logic  mode1x1,
  input  logic  relu,
  input  logic [15:0] OH, OW, KCB,
  output logic  take,
  output logic  idle,
  output logic  out_valid,
  output data_t out_data [C_VEC],
  output coord_t out_coord,
  input  logic  out_ready
);
  localparam int NCB = K_VEC / C_VEC;

  acc_t buf_q [K_VEC][P_VEC][S_VEC];
  logic landed, busy;
  logic [15:0] kg, oh0, ow0;
  logic [$clog2(P_VEC+1)-1:0] p;
  logic [$clog2(S_VEC+1)-1:0] l;
  logic [$clog2(NCB+1)-1:0]   ci;

  wire [15:0] cb_g = kg * 16'(NCB) + 16'(ci);
  wire [15:0] h_g  = oh0 + 16'(p);
  wire [15:0] w_g  = ow0 + 16'(l);
  wire in_range = (cb_g < KCB) && (h_g < OH) && (w_g < OW);
  wire adv      = busy && (!out_valid || out_ready);
  wire [$clog2(S_VEC+1)-1:0] nl = mode1x1 ? ($bits(nl))'(S_VEC) : ($bits(nl))'(1);
  wire at_end = (ci == ($bits(ci))'(NCB-1)) && (l == nl-1) && (p == ($bits(p))'(P_VEC-1));

  assign take = (landed || grp_valid) && !busy;
  assign idle = !busy && !landed && !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      landed <= 1'b0; busy <= 1'b0; kg <= '0; oh0 <= '0; ow0 <= '0;
      p <= '0; l <= '0; ci <= '0; out_valid <= 1'b0; out_coord <= '0;
      for (int c = 0; c < C_VEC; c++) out_data[c] <= '0;
    end else begin
      if (grp_valid) landed <= 1'b1;
      if (take) begin
        landed <= 1'b0; busy <= 1'b1;
        buf_q <= res;
        kg <= grp_kg; oh0 <= grp_oh; ow0 <= grp_ow;
        p <= '0; l <= '0; ci <= '0;
      end
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (adv) begin
        if (in_range) begin
          out_valid <= 1'b1;
          out_coord <= '{cb: cb_g, h: h_g, w: w_g};
          for (int c = 0; c < C_VEC; c++) begin
            data_t v;
            v = sat(buf_q[int'(ci)*C_VEC + c][p][l] >>> FRAC);
            out_data[c] <= (relu && v < 0) ? '0 : v;
          end
        end
        if (at_end) busy <= 1'b0;
        else if (ci != ($bits(ci))'(NCB-1)) ci <= ci + 1'b1;
        else begin
          ci <= '0;
          if (l != nl-1) l <= l + 1'b1;
          else begin l <= '0; p <= p + 1'b1; end
        end
      end
    end
  end
endmodule
