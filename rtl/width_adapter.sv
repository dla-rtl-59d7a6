// width_adapter: changes the number of lanes of a tensor-word stream.
//
// The Xbar puts one in front of and one behind an auxiliary kernel that is
// built narrower than the drain, to save logic on kernels that are used
// rarely: the kernel then takes several cycles per drain word.
//   IN_LANES > OUT_LANES: each input word leaves as IN/OUT beats, lowest
//     lanes first; every beat repeats the word's coordinate and gives its
//     beat number in out_sub.
//   IN_LANES < OUT_LANES: OUT/IN beats are gathered into one word (first
//     beat in the lowest lanes); the word takes the first beat's coordinate.
//   equal: the stream passes through a register stage.
// One lane count must divide the other. valid/ready on both sides.
module width_adapter
  import dla_pkg::*;
#(
  parameter int IN_LANES  = 8,
  parameter int OUT_LANES = 2
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  data_t  in_data [IN_LANES],
  input  coord_t in_coord,
  output logic   in_ready,
  output logic   out_valid,
  output data_t  out_data [OUT_LANES],
  output coord_t out_coord,
  output logic [7:0] out_sub,
  input  logic   out_ready
);
  if (IN_LANES > OUT_LANES) begin : g_narrow
    localparam int R = IN_LANES / OUT_LANES;
    data_t  hold [IN_LANES];
    logic [7:0] k;
    assign in_ready = !out_valid || (out_ready && k == 8'(R-1));
    assign out_sub  = k;
    always_comb for (int i = 0; i < OUT_LANES; i++) out_data[i] = hold[int'(k)*OUT_LANES + i];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        out_valid <= 1'b0; k <= '0; out_coord <= '0;
        for (int i = 0; i < IN_LANES; i++) hold[i] <= '0;
      end else begin
        if (out_valid && out_ready) begin
          if (k == 8'(R-1)) begin out_valid <= 1'b0; k <= '0; end
          else k <= k + 1'b1;
        end
        if (in_valid && in_ready) begin
          hold <= in_data; out_coord <= in_coord; out_valid <= 1'b1; k <= '0;
        end
      end
    end
  end else if (IN_LANES < OUT_LANES) begin : g_widen
    localparam int R = OUT_LANES / IN_LANES;
    logic [7:0] k;
    assign in_ready = !out_valid || out_ready;
    assign out_sub  = '0;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        out_valid <= 1'b0; k <= '0; out_coord <= '0;
        for (int i = 0; i < OUT_LANES; i++) out_data[i] <= '0;
      end else begin
        if (out_valid && out_ready) out_valid <= 1'b0;
        if (in_valid && in_ready) begin
          for (int i = 0; i < IN_LANES; i++) out_data[int'(k)*IN_LANES + i] <= in_data[i];
          if (k == 0) out_coord <= in_coord;
          if (k == 8'(R-1)) begin k <= '0; out_valid <= 1'b1; end
          else k <= k + 1'b1;
        end
      end
    end
  end else begin : g_same
    assign in_ready = !out_valid || out_ready;
    assign out_sub  = '0;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        out_valid <= 1'b0; out_coord <= '0;
        for (int i = 0; i < OUT_LANES; i++) out_data[i] <= '0;
      end else begin
        if (out_valid && out_ready) out_valid <= 1'b0;
        if (in_valid && in_ready) begin
          out_valid <= 1'b1; out_coord <= in_coord;
          for (int i = 0; i < OUT_LANES; i++) out_data[i] <= in_data[i];
        end
      end
    end
  end
endmodule
