// conv_sequencer: control of the convolution kernel.
//
// For one subgraph it walks the output tensor in groups of K_VEC output
// channels x P_VEC output rows x (1 or S_VEC) output columns, and for each
// group steps through filter rows r, filter column segments sc (S_VEC taps
// wide) and input channel blocks cb (C_VEC channels). Each step reads the
// P_VEC x S_VEC feature words it needs from the stream buffer and sends
// them, with the filter-cache address and first/last flags, into the PE
// array. Feature words that fall into the zero padding are replaced by 0.
//   normal mode: step reads input columns ow*stride + sc*S_VEC + s - pad
//   1x1 mode   : step reads input columns (ow+s)*stride - pad, s < S_VEC,
//                so the S_VEC multiplier lanes compute S_VEC output pixels.
// Tensor layout in the stream buffer: word (cb, h, w) at
// base + (cb*H + h)*W + w. Filter word (kg, r, sc, cb) of a PE at
// ((kg*R + r)*SC + sc)*CB + cb. In 1x1 mode a filter word holds the
// weights of S_VEC consecutive channel blocks (one per tap slot): word
// kg*ceil(CB/S_VEC) + cb/S_VEC, slot cb % S_VEC, sent as pe_slot.
// Drain stall: a PE keeps a group's results only until the next `last`
// reaches it, so the step carrying `last` is held back while the previous
// group has not yet been taken by the drain (pending). Stalled cycles are
// counted in stall_cycles.
// Timing: read addresses leave in the issue cycle; the feature block and
// control reach the PE array one cycle later, together.
// Loop order, layouts and the stall rule are this design's choices; the
// vectorisation and the 1x1 mode follow the paper.
module conv_sequencer
  import dla_pkg::*;
#(
  parameter int C_VEC    = 8,
  parameter int S_VEC    = 3,
  parameter int P_VEC    = 2,
  parameter int K_VEC    = 32,
  parameter int SB_DEPTH = 65536,
  parameter int FC_DEPTH = 512,
  parameter int SW       = (S_VEC > 1) ? $clog2(S_VEC) : 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic finish,
  // configuration (held during the subgraph)
  input  logic [31:0] in_base,
  input  logic [15:0] H, W, CB, OH, OW, KG, R, SC,
  input  logic [3:0]  stride,
  input  logic [3:0]  pad,
  input  logic        mode1x1,
  // stream buffer reads
  output logic                        rd_en   [P_VEC*S_VEC],
  output logic [$clog2(SB_DEPTH)-1:0] rd_addr [P_VEC*S_VEC],
  input  logic [C_VEC*DATA_W-1:0]     rd_data [P_VEC*S_VEC],
  // to the PE array
  output logic  pe_valid,
  output logic  pe_first,
  output logic  pe_last,
  output logic  pe_mode1x1,
  output logic [$clog2(FC_DEPTH)-1:0] pe_faddr,
  output logic [SW-1:0] pe_slot,
  output data_t pe_feat [P_VEC][S_VEC][C_VEC],
  // group bookkeeping with the drain
  input  logic        drain_take,
  input  logic        drain_idle,
  output logic [15:0] grp_kg, grp_oh, grp_ow,
  output logic        busy,
  output logic [31:0] stall_cycles
);
  localparam int NP = P_VEC*S_VEC;
  localparam int SA = $clog2(SB_DEPTH);
  localparam int FA = $clog2(FC_DEPTH);
  wire [31:0] CBW = (32'(CB) + S_VEC - 1) / S_VEC;   // filter words per (r, sc) in 1x1 mode

  typedef enum logic [1:0] {C_IDLE, C_RUN, C_FLUSH} cst_e;
  cst_e st;
  logic [15:0] kg, oh0, ow0, r, sc, cb;
  logic pending;

  wire is_first = (r == 0) && (sc == 0) && (cb == 0);
  wire is_last  = (r == R-1) && (sc == SC-1) && (cb == CB-1);
  wire stall    = (st == C_RUN) && is_last && pending;
  wire issue    = (st == C_RUN) && !stall;
  wire [15:0] ow_step = mode1x1 ? 16'(S_VEC) : 16'd1;
  wire last_grp = (kg == KG-1) && (oh0 + P_VEC >= OH) && (ow0 + ow_step >= OW);

  // address generation for the step held in the counters
  logic zero_d [NP];
  always_comb begin
    for (int p = 0; p < P_VEC; p++)
      for (int s = 0; s < S_VEC; s++) begin
        int ih, iw;
        ih = int'(oh0 + 16'(p)) * int'(stride) + int'(r) - int'(pad);
        if (mode1x1) iw = int'(ow0 + 16'(s)) * int'(stride) - int'(pad);
        else         iw = int'(ow0) * int'(stride) + int'(sc) * S_VEC + s - int'(pad);
        zero_d[p*S_VEC+s]  = (ih < 0) || (ih >= int'(H)) || (iw < 0) || (iw >= int'(W));
        rd_en[p*S_VEC+s]   = issue;
        rd_addr[p*S_VEC+s] = SA'(in_base + (32'(cb) * H + 32'(ih)) * W + 32'(iw));
      end
  end

  logic zero_q [NP];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; kg <= '0; oh0 <= '0; ow0 <= '0; r <= '0; sc <= '0; cb <= '0;
      pending <= 1'b0; finish <= 1'b0; stall_cycles <= '0;
      pe_valid <= 1'b0; pe_first <= 1'b0; pe_last <= 1'b0; pe_mode1x1 <= 1'b0; pe_faddr <= '0; pe_slot <= '0;
      grp_kg <= '0; grp_oh <= '0; grp_ow <= '0;
      for (int i = 0; i < NP; i++) zero_q[i] <= 1'b1;
    end else begin
      finish   <= 1'b0;
      pe_valid <= issue;
      pe_first <= is_first;
      pe_last  <= is_last;
      pe_mode1x1 <= mode1x1;
      // 1x1 mode: S_VEC channel blocks share one filter word, one per slot
      if (mode1x1) begin
        pe_faddr <= FA'(((32'(kg) * R + 32'(r)) * SC + 32'(sc)) * CBW + 32'(cb) / S_VEC);
        pe_slot  <= SW'(32'(cb) % S_VEC);
      end else begin
        pe_faddr <= FA'(((32'(kg) * R + 32'(r)) * SC + 32'(sc)) * CB + 32'(cb));
        pe_slot  <= '0;
      end
      zero_q   <= zero_d;
      if (stall) stall_cycles <= stall_cycles + 1'b1;
      if (drain_take) pending <= 1'b0;
      unique case (st)
        C_IDLE: if (start) begin
          st <= C_RUN; kg <= '0; oh0 <= '0; ow0 <= '0; r <= '0; sc <= '0; cb <= '0;
        end
        C_RUN: if (issue) begin
          if (is_last) begin
            pending <= 1'b1;
            grp_kg <= kg; grp_oh <= oh0; grp_ow <= ow0;
          end
          // advance cb -> sc -> r -> ow -> oh -> kg
          if (cb != CB-1) cb <= cb + 1'b1;
          else begin
            cb <= '0;
            if (sc != SC-1) sc <= sc + 1'b1;
            else begin
              sc <= '0;
              if (r != R-1) r <= r + 1'b1;
              else begin
                r <= '0;
                if (last_grp) st <= C_FLUSH;
                else if (ow0 + ow_step < OW) ow0 <= ow0 + ow_step;
                else begin
                  ow0 <= '0;
                  if (oh0 + P_VEC < OH) oh0 <= oh0 + 16'(P_VEC);
                  else begin oh0 <= '0; kg <= kg + 1'b1; end
                end
              end
            end
          end
        end
        C_FLUSH: if (!pending && drain_idle && !pe_valid) begin
          st <= C_IDLE; finish <= 1'b1;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  assign busy = (st != C_IDLE);

  always_comb
    for (int p = 0; p < P_VEC; p++)
      for (int s = 0; s < S_VEC; s++)
        for (int c = 0; c < C_VEC; c++)
          pe_feat[p][s][c] = zero_q[p*S_VEC+s] ? '0
                             : data_t'(rd_data[p*S_VEC+s][c*DATA_W +: DATA_W]);
endmodule
