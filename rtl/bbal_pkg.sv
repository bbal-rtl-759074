// bbal_pkg: constants and types shared by the BBAL accelerator.
//
// A BBFP(m,o) element is packed as {sign, flag, mant[m-1:0]}; a block of
// such elements shares one 5-bit exponent. Flag=1 marks a "high" mantissa
// that weighs 2^(m-o) more than a flag=0 ("low") mantissa. With FP16 input
// the integer value v = (-1)^sign * mant * 2^((m-o)*flag) stands for
// v * 2^(es - 15 - (m-1)).
//
// Following the paper: 5-bit shared exponent, BBFP(6,3) for the linear
// path (the highlighted configuration of the accuracy and area tables),
// BBFP(10,5) for the nonlinear unit, a 4x4 PE array, 16 nonlinear lanes,
// 7-bit LUT addresses. The accumulator width and the buffer depths are
// this design's own choice.
package bbal_pkg;

  typedef logic [15:0] fp16_t;

  localparam int unsigned EXP_W  = 5;   // shared exponent width (paper)

  // linear path: BBFP(6,3) on a 4x4 weight-stationary array
  localparam int unsigned LIN_M  = 6;
  localparam int unsigned LIN_O  = 3;
  localparam int unsigned ROWS   = 4;
  localparam int unsigned COLS   = 4;
  // accumulator: 2m product bits + 2(m-o) shift + log2(ROWS) growth + sign
  localparam int unsigned ACC_W  = 2*LIN_M + 2*(LIN_M-LIN_O) + $clog2(ROWS) + 1;

  // nonlinear unit: BBFP(10,5), 16 lanes, 128-entry LUT
  localparam int unsigned NL_M     = 10;
  localparam int unsigned NL_O     = 5;
  localparam int unsigned NL_LANES = 16;
  localparam int unsigned LUT_AW   = 7;
  localparam int unsigned LUT_DW   = NL_M + 2;   // one BBFP element per entry
  localparam int unsigned MEM_AW   = 2 + EXP_W + 8; // {function, exponent, word}

  // one row-major FP16 activation tile: ROWS vectors of ROWS elements,
  // element r of vector t at index t*ROWS + r; encoded as one BBFP block
  localparam int unsigned TILE = ROWS * ROWS;
  typedef logic [TILE-1:0][15:0] itile_t;

  // one BBFP weight tile as held in the weight buffer (encoded offline)
  typedef struct packed {
    logic [EXP_W-1:0]                       exp;
    logic [ROWS-1:0][COLS-1:0]              sign;
    logic [ROWS-1:0][COLS-1:0]              flag;
    logic [ROWS-1:0][COLS-1:0][LIN_M-1:0]   mant;
  } wtile_t;

  // one BBFP output block written back by the output encoder
  localparam int unsigned OTILE = ROWS * COLS;
  typedef struct packed {
    logic [EXP_W-1:0]             es;
    logic [OTILE-1:0]             sign;
    logic [OTILE-1:0]             flag;
    logic [OTILE-1:0][LIN_M-1:0]  mant;
  } otile_t;

  typedef enum logic [1:0] {
    NL_SOFTMAX = 2'd0,   // Align -> Sub -> LUT(exp) -> Adder tree -> Div
    NL_SIGMOID = 2'd1,   // Align -> LUT(1+e^-x) -> Div (1/y)
    NL_SILU    = 2'd2,   // Align -> LUT(sigmoid) -> Mul (x*y)
    NL_GELU    = 2'd3    // Align -> LUT(Phi)     -> Mul (x*y)
  } nl_op_e;

endpackage
