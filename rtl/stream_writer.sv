// stream_writer: writes the Xbar's output stream into the stream buffer.
//
// Each incoming word carries its tensor coordinate (cb, h, w); it is
// written to base + (cb*OH + h)*OW + w, the same channel-block-major layout
// the convolution reads, so the output of one subgraph is the input of the
// next. The writer owns the buffer's write port with priority (it never
// stalls the stream). The write data is the incoming word itself, passed
// through without a register; only the address is computed here. It
// finishes after n_words words. base, OH, OW and
// n_words come from its VLIW instructions. The address formula is this
// design's choice; the compiler allocates base (outputs usually from the
// top of the buffer downwards).
module stream_writer
  import dla_pkg::*;
#(
  parameter int C_VEC    = 8,
  parameter int SB_DEPTH = 65536
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic finish,
  input  logic [31:0] base,
  input  logic [15:0] OH, OW,
  input  logic [31:0] n_words,
  input  logic   in_valid,
  input  data_t  in_data [C_VEC],
  input  coord_t in_coord,
  output logic   in_ready,
  output logic   we,
  output logic [$clog2(SB_DEPTH)-1:0] waddr,
  output logic [C_VEC*DATA_W-1:0] wdata,
  output logic [31:0] words_written
);
  logic active;
  logic [31:0] left;

  assign in_ready = active;
  assign we       = in_valid && active;
  assign waddr    = ($clog2(SB_DEPTH))'(base + (32'(in_coord.cb) * OH + 32'(in_coord.h)) * OW
                                        + 32'(in_coord.w));
  always_comb for (int c = 0; c < C_VEC; c++) wdata[c*DATA_W +: DATA_W] = in_data[c];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; left <= '0; finish <= 1'b0; words_written <= '0;
    end else begin
      finish <= 1'b0;
      if (start) begin
        active <= (n_words != 0); left <= n_words;
        finish <= (n_words == 0);
      end else if (we) begin
        words_written <= words_written + 1'b1;
        left <= left - 1'b1;
        if (left == 1) begin active <= 1'b0; finish <= 1'b1; end
      end
    end
  end
endmodule
