// pool_kernel: max or average pooling on the Xbar.
//
// Programmed per subgraph by twelve VLIW instructions (see dla_top): type,
// input height/width, channel blocks per group and in total, output
// height/width, window height/width, stride, padding and the average
// multiplier. The convolution drains its output one group of CBG channel
// blocks at a time, so the kernel works group by group: it stores the
// group's input words (in any order, each placed by its coordinate) in a
// local buffer of DEPTH words, then walks every output pixel's window,
// reading one buffer word per cycle, and emits the pooled word:
//   max: largest value over the window positions inside the input
//   avg: (sum over the window, padding counting as 0) * avg_mult >>> 16,
//        avg_mult = round(65536 / (win_h*win_w)) given by the compiler.
// While computing it does not accept input, which back-pressures the drain.
// Output words carry coordinate (cb, oh, ow). Timing: one window position
// per cycle plus one cycle per output; a group of the input must fit in
// DEPTH words. The paper names the instructions; the group buffer is this
// design's own way to implement them (the paper does not describe the
// kernel's insides).
module pool_kernel
  import dla_pkg::*;
#(
  parameter int C_VEC = 8,
  parameter int DEPTH = 16384
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic finish,
  input  logic        avg,
  input  logic [15:0] H, W, CBG, TOTAL_CB, OH, OW, WIN_H, WIN_W,
  input  logic [3:0]  stride, pad,
  input  logic [16:0] avg_mult,
  input  logic   in_valid,
  input  data_t  in_data [C_VEC],
  input  coord_t in_coord,
  output logic   in_ready,
  output logic   out_valid,
  output data_t  out_data [C_VEC],
  output coord_t out_coord,
  input  logic   out_ready
);
  localparam int AW = $clog2(DEPTH);
  typedef enum logic [1:0] {P_IDLE, P_COLLECT, P_COMPUTE} pst_e;
  pst_e st;

  logic [C_VEC*DATA_W-1:0] mem [DEPTH];
  logic [C_VEC*DATA_W-1:0] q;

  logic [15:0] cb_base, ncb, cbi, oh, ow, wi, wj;
  logic [31:0] got, expect_n;

  // collect
  assign in_ready = (st == P_COLLECT);
  wire [15:0] lcb = in_coord.cb - cb_base;
  wire [AW-1:0] waddr = AW'((32'(lcb) * H + 32'(in_coord.h)) * W + 32'(in_coord.w));
  wire wr = in_valid && in_ready;
  logic [C_VEC*DATA_W-1:0] wdata;
  always_comb for (int c = 0; c < C_VEC; c++) wdata[c*DATA_W +: DATA_W] = in_data[c];

  // stage 1 state: data from the buffer
  logic s1_valid, s1_inside, s1_first, s1_last, s1_done;
  coord_t s1_coord;
  int   sum [C_VEC];
  data_t mx [C_VEC];
  logic any;   // a window position inside the input was seen

  // compute: window position held in the counters
  wire stall = out_valid && !out_ready;
  wire issue = (st == P_COMPUTE) && !stall && !s1_done;
  int ih, iw;
  always_comb begin
    ih = int'(oh) * int'(stride) + int'(wi) - int'(pad);
    iw = int'(ow) * int'(stride) + int'(wj) - int'(pad);
  end
  wire in_win = (ih >= 0) && (ih < int'(H)) && (iw >= 0) && (iw < int'(W));
  wire [AW-1:0] raddr = AW'((32'(cbi) * H + 32'(ih)) * W + 32'(iw));
  wire w_first = (wi == 0) && (wj == 0);
  wire w_last  = (wi == WIN_H-1) && (wj == WIN_W-1);
  wire all_last = w_last && (ow == OW-1) && (oh == OH-1) && (cbi == ncb-1);

  always_ff @(posedge clk) begin
    if (wr) mem[waddr] <= wdata;
    if (issue) q <= mem[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_IDLE; finish <= 1'b0; cb_base <= '0; ncb <= '0; cbi <= '0; oh <= '0; ow <= '0;
      wi <= '0; wj <= '0; got <= '0; expect_n <= '0;
      s1_valid <= 1'b0; s1_inside <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_done <= 1'b0;
      s1_coord <= '0; any <= 1'b0; out_valid <= 1'b0; out_coord <= '0;
      for (int c = 0; c < C_VEC; c++) begin sum[c] <= 0; mx[c] <= '0; out_data[c] <= '0; end
    end else begin
      finish <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (st)
        P_IDLE: if (start) begin
          cb_base <= '0;
          ncb <= (TOTAL_CB < CBG) ? TOTAL_CB : CBG;
          expect_n <= 32'((TOTAL_CB < CBG) ? TOTAL_CB : CBG) * H * W;
          got <= '0; st <= P_COLLECT;
        end
        P_COLLECT: if (wr) begin
          got <= got + 1;
          if (got + 1 == expect_n) begin
            st <= P_COMPUTE; cbi <= '0; oh <= '0; ow <= '0; wi <= '0; wj <= '0; s1_done <= 1'b0;
          end
        end
        P_COMPUTE: begin
          if (issue) begin
            s1_inside <= in_win; s1_first <= w_first; s1_last <= w_last;
            s1_coord  <= '{cb: cb_base + cbi, h: oh, w: ow};
            if (all_last) s1_done <= 1'b1;
            if (wj != WIN_W-1) wj <= wj + 1'b1;
            else begin
              wj <= '0;
              if (wi != WIN_H-1) wi <= wi + 1'b1;
              else begin
                wi <= '0;
                if (ow != OW-1) ow <= ow + 1'b1;
                else begin
                  ow <= '0;
                  if (oh != OH-1) oh <= oh + 1'b1;
                  else begin oh <= '0; cbi <= cbi + 1'b1; end
                end
              end
            end
          end
          if (!stall) s1_valid <= issue;
          // group finished once the last output has left stage 1
          if (s1_done && !s1_valid && !stall) begin
            s1_done <= 1'b0;
            if (32'(cb_base) + 32'(CBG) >= 32'(TOTAL_CB)) begin
              st <= P_IDLE; finish <= 1'b1;
            end else begin
              cb_base <= cb_base + CBG;
              ncb <= (TOTAL_CB - cb_base - CBG < CBG) ? TOTAL_CB - cb_base - CBG : CBG;
              expect_n <= 32'((TOTAL_CB - cb_base - CBG < CBG) ? TOTAL_CB - cb_base - CBG : CBG) * H * W;
              got <= '0; st <= P_COLLECT;
            end
          end
        end
        default: st <= P_IDLE;
      endcase

      // accumulate window values (stage 1)
      if (s1_valid && !stall) begin
        logic any_n;
        any_n = (s1_first ? 1'b0 : any) | s1_inside;
        any <= any_n;
        for (int c = 0; c < C_VEC; c++) begin
          data_t v;
          int    sn;
          data_t mn;
          v  = s1_inside ? data_t'(q[c*DATA_W +: DATA_W]) : '0;
          sn = (s1_first ? 0 : sum[c]) + int'(v);
          if (s1_first || !any) mn = s1_inside ? v : data_t'(-(1 << (DATA_W-1)));
          else                  mn = (s1_inside && v > mx[c]) ? v : mx[c];
          sum[c] <= sn;
          mx[c]  <= mn;
          if (s1_last) begin
            logic signed [63:0] prod;
            prod = 64'(sn) * 64'(avg_mult);
            out_data[c] <= avg ? sat(ACC_W'(prod >>> 16)) : mn;
          end
        end
        if (s1_last) begin out_valid <= 1'b1; out_coord <= s1_coord; end
      end
    end
  end
endmodule
