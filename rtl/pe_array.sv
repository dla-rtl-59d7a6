// pe_array: the 1D systolic array of K_VEC processing elements.
//
// PE k computes output channel k of the current group of K_VEC output
// channels, using the filter words held in its own double-buffered filter
// cache. The feature block and its control (valid/first/last, 1x1 mode,
// filter address, 1x1 tap slot) enter PE 0 and move one PE per cycle down the chain, so
// PE k works on a step k cycles after PE 0 and all PEs share one stream
// buffer read. PE k's results appear in res[k] two cycles after the step
// marked `last` reached it; grp_valid pulses when the last PE has its
// results, at which point res[] holds the whole group (each PE keeps its
// results until the next `last` reaches it).
// Filter loading: fc_we/fc_sel/fc_waddr/fc_wdata write one word into the
// cache of PE fc_sel, bank fc_wbank. rbank selects the bank being read.
// The 1D systolic chain, the filter cache in every PE and the Q_VEC=1,
// P_VEC/C_VEC/K_VEC/S_VEC vectorisation follow the paper.
module pe_array
  import dla_pkg::*;
#(
  parameter int C_VEC    = 8,
  parameter int S_VEC    = 3,
  parameter int P_VEC    = 2,
  parameter int K_VEC    = 32,
  parameter int FC_DEPTH = 512,
  parameter int SW       = (S_VEC > 1) ? $clog2(S_VEC) : 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic  in_valid,
  input  logic  in_first,
  input  logic  in_last,
  input  logic  in_mode1x1,
  input  logic [$clog2(FC_DEPTH)-1:0] in_faddr,
  input  logic [SW-1:0] in_slot,
  input  data_t in_feat [P_VEC][S_VEC][C_VEC],
  input  logic  rbank,
  // filter cache write port
  input  logic  fc_we,
  input  logic  fc_wbank,
  input  logic [$clog2(K_VEC)-1:0] fc_sel,
  input  logic [$clog2(FC_DEPTH)-1:0] fc_waddr,
  input  logic [S_VEC*C_VEC*DATA_W-1:0] fc_wdata,
  // results
  output logic  grp_valid,
  output acc_t  res [K_VEC][P_VEC][S_VEC]
);
  localparam int FW = $clog2(FC_DEPTH);
  logic [SW-1:0] sl [K_VEC+1];

  logic  v [K_VEC+1], f [K_VEC+1], l [K_VEC+1], m [K_VEC+1];
  logic [FW-1:0] a [K_VEC+1];
  data_t x [K_VEC+1][P_VEC][S_VEC][C_VEC];
  logic  rv [K_VEC];

  assign v[0] = in_valid;
  assign f[0] = in_first;
  assign l[0] = in_last;
  assign m[0] = in_mode1x1;
  assign a[0] = in_faddr;
  assign sl[0] = in_slot;
  assign x[0] = in_feat;

  for (genvar k = 0; k < K_VEC; k++) begin : g_pe
    logic [FW-1:0] raddr;
    data_t wgt [S_VEC][C_VEC];

    filter_cache #(.C_VEC(C_VEC), .S_VEC(S_VEC), .DEPTH(FC_DEPTH)) u_fc (
      .clk,
      .we(fc_we && fc_sel == ($clog2(K_VEC))'(k)), .wbank(fc_wbank),
      .waddr(fc_waddr), .wdata(fc_wdata),
      .rbank, .raddr, .rdata(wgt)
    );

    dla_pe #(.C_VEC(C_VEC), .S_VEC(S_VEC), .P_VEC(P_VEC), .FADDR_W(FW), .SLOT_W(SW)) u_pe (
      .clk, .rst_n,
      .in_valid(v[k]), .in_first(f[k]), .in_last(l[k]), .in_mode1x1(m[k]),
      .in_faddr(a[k]), .in_slot(sl[k]), .in_feat(x[k]),
      .out_valid(v[k+1]), .out_first(f[k+1]), .out_last(l[k+1]),
      .out_mode1x1(m[k+1]), .out_faddr(a[k+1]), .out_slot(sl[k+1]), .out_feat(x[k+1]),
      .f_raddr(raddr), .wgt,
      .res_valid(rv[k]), .res(res[k])
    );
  end

  assign grp_valid = rv[K_VEC-1];
endmodule
