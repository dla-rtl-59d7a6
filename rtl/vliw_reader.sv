// vliw_reader: head of the VLIW network.
//
// On start it fetches n_words 32-bit words, starting at word address base,
// from external memory and sends them down the 8-bit unidirectional ring,
// least significant byte first. The byte stream is the VLIW program: for
// each kernel a header byte (the kernel identifier), a length byte (number
// of 32-bit instructions) and the instructions themselves; byte 0x00 in
// header position is a one-byte filler. The ring is closed: bytes that have
// passed every transport come back on ring_in and are discarded; the reader
// reports done once all bytes it sent have come back.
// Memory port: req/addr held until gnt; data returns in order on rvalid.
// One word is fetched while the previous one is being sent, so with a
// short memory latency the ring carries close to one byte per cycle.
// The 8-bit ring and the 32-bit instructions follow the paper; the program
// layout, the length byte and the memory handshake are this design's own.
module vliw_reader
  import dla_pkg::*;
#(
  parameter int ADDR_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base,
  input  logic [ADDR_W-1:0] n_words,
  output logic              busy,
  output logic              done,      // pulse: the whole program went round
  // external memory read port
  output logic              mem_req,
  output logic [ADDR_W-1:0] mem_addr,
  input  logic              mem_gnt,
  input  logic              mem_rvalid,
  input  logic [31:0]       mem_rdata,
  // ring out / ring back in
  output logic              ring_out_valid,
  output logic [RING_W-1:0] ring_out_data,
  input  logic              ring_out_ready,
  input  logic              ring_in_valid,
  input  logic [RING_W-1:0] ring_in_data
);
  logic [ADDR_W-1:0] req_left, rsp_left;
  logic [ADDR_W+1:0] bytes_out, bytes_back;
  logic              outstanding;     // a read has been granted, data pending
  logic              nxt_valid;       // one fetched word waiting to be sent
  logic [31:0]       nxt_word;
  logic [31:0]       sh;              // word being sent
  logic [2:0]        sh_left;         // bytes of sh still to send

  assign ring_out_valid = (sh_left != 0);
  assign ring_out_data  = sh[RING_W-1:0];
  assign mem_req  = busy && (req_left != 0) && !outstanding && !nxt_valid;

  wire send    = ring_out_valid && ring_out_ready;
  wire sh_free = (sh_left == 0) || (sh_left == 1 && send);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; req_left <= '0; rsp_left <= '0;
      mem_addr <= '0; outstanding <= 1'b0; nxt_valid <= 1'b0; nxt_word <= '0;
      sh <= '0; sh_left <= '0; bytes_out <= '0; bytes_back <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; req_left <= n_words; rsp_left <= n_words; mem_addr <= base;
        bytes_out <= '0; bytes_back <= '0;
      end
      if (mem_req && mem_gnt) begin
        outstanding <= 1'b1;
        req_left    <= req_left - 1'b1;
      end
      if (mem_rvalid) begin
        outstanding <= 1'b0;
        mem_addr    <= mem_addr + 1'b1;
        nxt_valid   <= 1'b1;
        nxt_word    <= mem_rdata;
        rsp_left    <= rsp_left - 1'b1;
      end
      if (send) begin
        sh        <= sh >> RING_W;
        sh_left   <= sh_left - 1'b1;
        bytes_out <= bytes_out + 1'b1;
      end
      // a request is only issued with nxt_valid clear, so a response never
      // arrives while nxt_valid is set
      if (sh_free && nxt_valid) begin
        sh <= nxt_word; sh_left <= 3'd4; nxt_valid <= 1'b0;
      end
      if (ring_in_valid) bytes_back <= bytes_back + 1'b1;
      if (busy && req_left == 0 && rsp_left == 0 && !nxt_valid && sh_left == 0 &&
          bytes_back == bytes_out) begin
        busy <= 1'b0; done <= 1'b1;
      end
    end
  end
endmodule
