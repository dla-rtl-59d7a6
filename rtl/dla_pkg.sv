// dla_pkg: types, constants and arithmetic helpers shared by the DLA overlay.
//
// Numbers: the overlay's arithmetic is signed fixed point. A feature or
// filter value is DATA_W bits with FRAC fractional bits; products and sums
// are kept in ACC_W-bit accumulators and rescaled on the way out of the PE
// array. The original overlay uses reduced-precision floating point and does
// not describe its numerics, so the number format here is this design's own.
//
// Kernel identifiers are the header bytes of the VLIW ring (one per kernel
// that hangs off the ring). Header byte 0 is a one-byte no-op used as filler.
package dla_pkg;

  localparam int DATA_W  = 16;   // feature / filter value width
  localparam int FRAC    = 8;    // fractional bits of DATA_W values
  localparam int ACC_W   = 48;   // accumulator width
  localparam int INSTR_W = 32;   // width of one VLIW instruction (paper: 32)
  localparam int RING_W  = 8;    // VLIW ring width (paper: 8 bits)
  localparam int CRD_W   = 16;   // width of one tensor coordinate

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [INSTR_W-1:0]       instr_t;

  // Position of a stream word in a tensor: channel block, row, column.
  typedef struct packed {
    logic [CRD_W-1:0] cb;
    logic [CRD_W-1:0] h;
    logic [CRD_W-1:0] w;
  } coord_t;

  // VLIW header bytes (kernel identifiers on the ring).
  typedef enum logic [7:0] {
    KID_NOP    = 8'h00,
    KID_CONV   = 8'h01,
    KID_FILTER = 8'h02,
    KID_DMA    = 8'h03,
    KID_POOL   = 8'h04,
    KID_LSTM   = 8'h05,
    KID_XBAR   = 8'h06,
    KID_WRITER = 8'h07,
    KID_LRN    = 8'h08
  } kid_e;

  // Instruction counts per kernel (one subgraph's program for that kernel).
  localparam int N_CONV_INSTR   = 13;
  localparam int N_FILTER_INSTR = 4;
  localparam int N_DMA_INSTR    = 4;
  localparam int N_POOL_INSTR   = 12;
  localparam int N_LSTM_INSTR   = 2;
  localparam int N_XBAR_INSTR   = 5;
  localparam int N_WRITER_INSTR = 5;

  // Xbar source codes: which producer feeds a consumer.
  typedef enum logic [2:0] {
    SRC_DRAIN = 3'd0,
    SRC_POOL  = 3'd1,
    SRC_LSTM  = 3'd2,
    SRC_LRN   = 3'd3,
    SRC_NONE  = 3'd7
  } xsrc_e;

  // Saturate a wide signed value to DATA_W bits.
  function automatic data_t sat(input logic signed [ACC_W-1:0] v);
    localparam logic signed [ACC_W-1:0] MAXV = (ACC_W'(1) <<< (DATA_W-1)) - 1;
    localparam logic signed [ACC_W-1:0] MINV = -(ACC_W'(1) <<< (DATA_W-1));
    if (v > MAXV)      return data_t'(MAXV);
    else if (v < MINV) return data_t'(MINV);
    else               return data_t'(v);
  endfunction

  // Fixed-point product of two DATA_W values, result in DATA_W (saturated).
  function automatic data_t fmul(input data_t a, input data_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b;
    return sat(ACC_W'(p >>> FRAC));
  endfunction

  // Piecewise-linear sigmoid (four segments of power-of-two slopes):
  //   |x| >= 5      : 1
  //   2.375..5      : x/32 + 0.84375
  //   1..2.375      : x/8  + 0.625
  //   0..1          : x/4  + 0.5
  // and sigmoid(-x) = 1 - sigmoid(x).
  function automatic data_t sigmoid(input data_t x);
    int ax, y;
    localparam int ONE = 1 << FRAC;
    ax = (x < 0) ? -int'(x) : int'(x);
    if (ax >= 5 * ONE)                  y = ONE;
    else if (ax >= (19 * ONE) / 8)      y = (ax >>> 5) + (27 * ONE) / 32;
    else if (ax >= ONE)                 y = (ax >>> 3) + (5 * ONE) / 8;
    else                                y = (ax >>> 2) + ONE / 2;
    if (x < 0) y = ONE - y;
    return data_t'(y);
  endfunction

  // tanh(x) = 2*sigmoid(2x) - 1, using the same piecewise-linear sigmoid.
  function automatic data_t tanh_f(input data_t x);
    data_t x2;
    int y;
    x2 = sat(ACC_W'(x) <<< 1);
    y  = (int'(sigmoid(x2)) <<< 1) - (1 << FRAC);
    return data_t'(y);
  endfunction

endpackage
