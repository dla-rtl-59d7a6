// xbar: the interconnect between the PE array's drain, the auxiliary
// kernels and the stream buffer writer.
//
// Producers: the drain, the pool kernel, the LSTM kernel and the LRN kernel
// (the latter outside this design, reached through its ports). Consumers:
// pool, LSTM, LRN and the stream writer. For every consumer a run-time
// source select (one of the xsrc_e codes, loaded as VLIW instructions)
// picks its producer, so the order of auxiliary operations in a subgraph
// (e.g. pool before or after LRN) is chosen per subgraph, and unused
// kernels are bypassed. A producer's ready is the ready of the consumer
// that selected it; each producer should feed at most one consumer.
// The LRN kernel is LRN_VEC lanes wide: a width adapter splits each drain
// word into C_VEC/LRN_VEC beats on the way in and another gathers them on
// the way out, so the narrow kernel takes proportionally more cycles.
// Purely combinational except inside the two width adapters.
// Routing by per-consumer multiplexers and the width adapters follow the
// paper's description; the paper's Xbar is generated per network, this one
// has a fixed set of ports.
module xbar
  import dla_pkg::*;
#(
  parameter int C_VEC   = 8,
  parameter int LRN_VEC = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  xsrc_e pool_src, lstm_src, lrn_src, wr_src,
  // producers
  input  logic   drain_valid, input data_t drain_data [C_VEC], input coord_t drain_coord,
  output logic   drain_ready,
  input  logic   pool_o_valid, input data_t pool_o_data [C_VEC], input coord_t pool_o_coord,
  output logic   pool_o_ready,
  input  logic   lstm_o_valid, input data_t lstm_o_data [C_VEC], input coord_t lstm_o_coord,
  output logic   lstm_o_ready,
  input  logic   lrn_o_valid, input data_t lrn_o_data [LRN_VEC], input coord_t lrn_o_coord,
  output logic   lrn_o_ready,
  // consumers
  output logic   pool_i_valid, output data_t pool_i_data [C_VEC], output coord_t pool_i_coord,
  input  logic   pool_i_ready,
  output logic   lstm_i_valid, output data_t lstm_i_data [C_VEC], output coord_t lstm_i_coord,
  input  logic   lstm_i_ready,
  output logic   lrn_i_valid, output data_t lrn_i_data [LRN_VEC], output coord_t lrn_i_coord,
  output logic [7:0] lrn_i_sub,
  input  logic   lrn_i_ready,
  output logic   wr_valid, output data_t wr_data [C_VEC], output coord_t wr_coord,
  input  logic   wr_ready
);
  localparam int NP = 4;
  logic   pv [NP];
  data_t  pd [NP][C_VEC];
  coord_t pc [NP];
  logic   pr_drain, pr_pool, pr_lstm, pr_lrn;   // producer readies

  // LRN path width adapters
  logic   lw_valid, lw_ready;  // wide side of the LRN output
  data_t  lw_data [C_VEC];
  coord_t lw_coord;
  logic   ln_valid, ln_ready;  // wide side of the LRN input
  data_t  ln_data [C_VEC];
  coord_t ln_coord;
  logic [7:0] unused_sub;

  width_adapter #(.IN_LANES(C_VEC), .OUT_LANES(LRN_VEC)) u_to_lrn (
    .clk, .rst_n, .in_valid(ln_valid), .in_data(ln_data), .in_coord(ln_coord),
    .in_ready(ln_ready), .out_valid(lrn_i_valid), .out_data(lrn_i_data),
    .out_coord(lrn_i_coord), .out_sub(lrn_i_sub), .out_ready(lrn_i_ready));
  width_adapter #(.IN_LANES(LRN_VEC), .OUT_LANES(C_VEC)) u_from_lrn (
    .clk, .rst_n, .in_valid(lrn_o_valid), .in_data(lrn_o_data), .in_coord(lrn_o_coord),
    .in_ready(lrn_o_ready), .out_valid(lw_valid), .out_data(lw_data),
    .out_coord(lw_coord), .out_sub(unused_sub), .out_ready(lw_ready));

  assign pv[0] = drain_valid;  assign pd[0] = drain_data;  assign pc[0] = drain_coord;
  assign pv[1]  = pool_o_valid; assign pd[1]  = pool_o_data; assign pc[1]  = pool_o_coord;
  assign pv[2]  = lstm_o_valid; assign pd[2]  = lstm_o_data; assign pc[2]  = lstm_o_coord;
  assign pv[3]   = lw_valid;     assign pd[3]   = lw_data;     assign pc[3]   = lw_coord;
  assign drain_ready  = pr_drain;
  assign pool_o_ready = pr_pool;
  assign lstm_o_ready = pr_lstm;
  assign lw_ready     = pr_lrn;

  function automatic logic sel_ok(input xsrc_e s);
    return s inside {SRC_DRAIN, SRC_POOL, SRC_LSTM, SRC_LRN};
  endfunction

  // ready of producer i: the ready of the consumer that selected it
  function automatic logic ready_of(input logic [1:0] i);
    return (sel_ok(pool_src) && pool_src[1:0] == i && pool_i_ready)
        || (sel_ok(lstm_src) && lstm_src[1:0] == i && lstm_i_ready)
        || (sel_ok(lrn_src)  && lrn_src[1:0]  == i && ln_ready)
        || (sel_ok(wr_src)   && wr_src[1:0]   == i && wr_ready);
  endfunction

  always_comb begin
    pool_i_valid = sel_ok(pool_src) && pv[pool_src[1:0]];
    pool_i_data  = pd[pool_src[1:0]];
    pool_i_coord = pc[pool_src[1:0]];
    lstm_i_valid = sel_ok(lstm_src) && pv[lstm_src[1:0]];
    lstm_i_data  = pd[lstm_src[1:0]];
    lstm_i_coord = pc[lstm_src[1:0]];
    ln_valid     = sel_ok(lrn_src) && pv[lrn_src[1:0]];
    ln_data      = pd[lrn_src[1:0]];
    ln_coord     = pc[lrn_src[1:0]];
    wr_valid     = sel_ok(wr_src) && pv[wr_src[1:0]];
    wr_data      = pd[wr_src[1:0]];
    wr_coord     = pc[wr_src[1:0]];
    pr_drain = ready_of(2'd0);
    pr_pool  = ready_of(2'd1);
    pr_lstm  = ready_of(2'd2);
    pr_lrn   = ready_of(2'd3);
  end
endmodule
