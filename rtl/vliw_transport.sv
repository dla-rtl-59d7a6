// vliw_transport: one stop of the VLIW ring, in front of one kernel.
//
// Every byte on the ring passes through a register stage here and goes on
// to the next stop. All stops parse the same byte stream in step: a header
// byte naming a kernel (0x00 is a one-byte filler), a length byte giving the
// number of 32-bit instructions, then 4*length payload bytes. The stop whose
// KID matches the header assembles the payload bytes (least significant
// first) into 32-bit instructions and pushes them into its instruction queue,
// from which the kernel reads them. The queue holds FIFO_DEPTH instructions,
// enough for the next subgraph's program to wait while the kernel runs the
// current one. If the queue is full the ring stalls (in_ready low).
// Header parsing, redirection and 8-to-32 bit assembly are the paper's; the
// length byte and the queue depth are this design's choice.
module vliw_transport
  import dla_pkg::*;
#(
  parameter logic [7:0] KID        = 8'h01,
  parameter int         FIFO_DEPTH = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [RING_W-1:0] in_data,
  output logic              in_ready,
  output logic              out_valid,
  output logic [RING_W-1:0] out_data,
  input  logic              out_ready,
  // instruction port to the kernel
  output logic              instr_valid,
  output instr_t            instr_data,
  input  logic              instr_ready
);
  typedef enum logic [1:0] {P_HDR, P_LEN, P_PAY} pst_e;
  pst_e        pst;
  logic        mine;
  logic [9:0]  left;       // payload bytes still to come
  logic [1:0]  bpos;       // byte position in the instruction being built
  logic [23:0] part;       // bytes already assembled

  logic   q_in_valid, q_in_ready;
  instr_t q_in_data;

  wire stage_free = !out_valid || out_ready;
  wire word_end   = (pst == P_PAY) && mine && (bpos == 2'd3);
  assign in_ready = stage_free && !(word_end && !q_in_ready);
  wire take = in_valid && in_ready;

  assign q_in_valid = take && word_end;
  assign q_in_data  = {in_data, part};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0;
      pst <= P_HDR; mine <= 1'b0; left <= '0; bpos <= '0; part <= '0;
    end else begin
      if (stage_free) out_valid <= 1'b0;
      if (take) begin
        out_valid <= 1'b1;
        out_data  <= in_data;
        unique case (pst)
          P_HDR: if (in_data != KID_NOP) begin
            mine <= (in_data == KID);
            pst  <= P_LEN;
          end
          P_LEN: begin
            left <= {in_data, 2'b00};
            bpos <= '0;
            pst  <= (in_data == 0) ? P_HDR : P_PAY;
          end
          P_PAY: begin
            bpos <= bpos + 1'b1;
            part <= {in_data, part[23:8]};
            left <= left - 1'b1;
            if (left == 10'd1) pst <= P_HDR;
          end
          default: pst <= P_HDR;
        endcase
      end
    end
  end

  sync_fifo #(.WIDTH(INSTR_W), .DEPTH(FIFO_DEPTH)) u_q (
    .clk, .rst_n,
    .in_valid(q_in_valid), .in_data(q_in_data), .in_ready(q_in_ready),
    .out_valid(instr_valid), .out_data(instr_data), .out_ready(instr_ready)
  );
endmodule
