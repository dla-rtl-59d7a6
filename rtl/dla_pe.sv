// dla_pe: one processing element of the 1D systolic PE array.
//
// Each PE owns one output channel (one filter) of the current output group.
// Per step it receives a feature block feat[P_VEC][S_VEC][C_VEC] (P_VEC
// output rows, S_VEC filter-width taps, C_VEC input channels) and the filter
// word wgt[S_VEC][C_VEC] read from its filter cache, and forms dot products:
//   normal mode : lane 0 of row p gets sum_s sum_c feat[p][s][c]*wgt[s][c]
//   1x1 mode    : lane s of row p gets sum_c feat[p][s][c]*wgt[slot][c]
// In 1x1 mode the multipliers that would take the 2nd and 3rd filter tap
// instead compute two more output pixels, as the paper describes for its
// 1x1-filter optimisation. A 1x1 filter needs only C_VEC weights per input
// channel block, so one filter word holds S_VEC channel blocks, one per
// slot, and the step's slot (carried with the address) picks the one in
// use; this is the paper's second 1x1 measure, loading more 1-wide filters
// with the bandwidth meant for 3-wide ones. Sums are accumulated over steps: `first` restarts
// the accumulators and `last` copies the final sums into res (res_valid
// pulses). The accumulators are ACC_W bits wide.
// Timing: the input bundle (feat, control, filter address) is registered
// once and passed on to the next PE (out_*), which makes the array systolic;
// the filter address is sent to the filter cache from that register, and the
// weight comes back one cycle later, when the MAC happens on a second copy
// of the bundle. res_valid follows the input `last` by two cycles.
module dla_pe
  import dla_pkg::*;
#(
  parameter int C_VEC  = 8,
  parameter int S_VEC  = 3,
  parameter int P_VEC  = 2,
  parameter int FADDR_W = 10,
  parameter int SLOT_W  = (S_VEC > 1) ? $clog2(S_VEC) : 1
) (
  input  logic clk,
  input  logic rst_n,
  // systolic input
  input  logic  in_valid,
  input  logic  in_first,
  input  logic  in_last,
  input  logic  in_mode1x1,
  input  logic [FADDR_W-1:0] in_faddr,
  input  logic [SLOT_W-1:0]  in_slot,
  input  data_t in_feat [P_VEC][S_VEC][C_VEC],
  // systolic output (to the next PE)
  output logic  out_valid,
  output logic  out_first,
  output logic  out_last,
  output logic  out_mode1x1,
  output logic [FADDR_W-1:0] out_faddr,
  output logic [SLOT_W-1:0]  out_slot,
  output data_t out_feat [P_VEC][S_VEC][C_VEC],
  // filter cache: address issued from the first stage, data one cycle later
  output logic [FADDR_W-1:0] f_raddr,
  input  data_t wgt [S_VEC][C_VEC],
  // results
  output logic  res_valid,
  output acc_t  res [P_VEC][S_VEC]
);
  // stage 1: systolic register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_first <= 1'b0; out_last <= 1'b0; out_mode1x1 <= 1'b0;
      out_faddr <= '0; out_slot <= '0;
    end else begin
      out_valid <= in_valid; out_first <= in_first; out_last <= in_last;
      out_mode1x1 <= in_mode1x1; out_faddr <= in_faddr; out_slot <= in_slot;
    end
  end
  always_ff @(posedge clk) out_feat <= in_feat;
  assign f_raddr = out_faddr;

  // stage 2: aligned with the weight read from the filter cache
  logic  s2_valid, s2_first, s2_last, s2_mode;
  logic [SLOT_W-1:0] s2_slot;
  data_t s2_feat [P_VEC][S_VEC][C_VEC];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0; s2_first <= 1'b0; s2_last <= 1'b0; s2_mode <= 1'b0; s2_slot <= '0;
    end else begin
      s2_valid <= out_valid; s2_first <= out_first; s2_last <= out_last; s2_mode <= out_mode1x1;
      s2_slot <= out_slot;
    end
  end
  always_ff @(posedge clk) s2_feat <= out_feat;

  // dot products
  acc_t lane_sum [P_VEC][S_VEC];
  always_comb begin
    for (int p = 0; p < P_VEC; p++) begin
      acc_t tot;
      tot = '0;
      for (int s = 0; s < S_VEC; s++) begin
        acc_t ps;
        ps = '0;
        for (int c = 0; c < C_VEC; c++)
          ps += ACC_W'(s2_feat[p][s][c] * data_t'(s2_mode ? wgt[s2_slot][c] : wgt[s][c]));
        tot += ps;
        lane_sum[p][s] = ps;
      end
      if (!s2_mode) begin
        lane_sum[p][0] = tot;
        for (int s = 1; s < S_VEC; s++) lane_sum[p][s] = '0;
      end
    end
  end

  acc_t acc [P_VEC][S_VEC];
  acc_t acc_nxt [P_VEC][S_VEC];
  always_comb
    for (int p = 0; p < P_VEC; p++)
      for (int s = 0; s < S_VEC; s++)
        acc_nxt[p][s] = s2_first ? lane_sum[p][s] : acc[p][s] + lane_sum[p][s];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      for (int p = 0; p < P_VEC; p++)
        for (int s = 0; s < S_VEC; s++) begin acc[p][s] <= '0; res[p][s] <= '0; end
    end else begin
      res_valid <= s2_valid && s2_last;
      if (s2_valid) begin
        acc <= acc_nxt;
        if (s2_last) res <= acc_nxt;
      end
    end
  end
endmodule
