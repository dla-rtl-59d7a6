// kernel_ctrl: the instruction registers of one DLA kernel.
//
// A kernel's VLIW "instructions" are counter end values and flags loaded
// straight into registers, with no decoding. This block pops N_INSTR 32-bit
// instructions, one per cycle, from the kernel's transport queue into
// cfg[0..N_INSTR-1], then waits at the subgraph barrier. When every kernel
// has loaded (all_loaded) it pulses start; the kernel runs and pulses
// finish; this block then holds done until every kernel is done (all_done)
// and goes back to loading the next subgraph's instructions.
// Bit 0 of cfg[0] enables the kernel for the subgraph; a disabled kernel is
// done as soon as it starts. The barrier between subgraphs is this design's
// choice: the paper does not say how kernels synchronise.
module kernel_ctrl
  import dla_pkg::*;
#(
  parameter int N_INSTR = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   instr_valid,
  input  instr_t instr_data,
  output logic   instr_ready,
  output instr_t cfg [N_INSTR],
  output logic   loaded,     // waiting at the start barrier
  input  logic   all_loaded,
  output logic   start,      // one-cycle pulse: run the loaded subgraph
  input  logic   finish,     // kernel has finished the subgraph
  output logic   done,       // waiting at the end barrier
  input  logic   all_done
);
  typedef enum logic [1:0] {S_LOAD, S_WAIT, S_RUN, S_DONE} st_e;
  st_e st;
  logic [$clog2(N_INSTR+1)-1:0] n;

  assign instr_ready = (st == S_LOAD);
  assign loaded = (st == S_WAIT);
  assign done   = (st == S_DONE);
  assign start  = (st == S_WAIT) && all_loaded && cfg[0][0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_LOAD;
      n  <= '0;
      for (int i = 0; i < N_INSTR; i++) cfg[i] <= '0;
    end else begin
      unique case (st)
        S_LOAD: if (instr_valid) begin
          cfg[n[$clog2(N_INSTR)-1:0]] <= instr_data;
          if (n == ($bits(n))'(N_INSTR-1)) begin n <= '0; st <= S_WAIT; end
          else n <= n + 1'b1;
        end
        S_WAIT: if (all_loaded) st <= cfg[0][0] ? S_RUN : S_DONE;
        S_RUN:  if (finish) st <= S_DONE;
        S_DONE: if (all_done) st <= S_LOAD;
      endcase
    end
  end
endmodule
