// lstm_pkg: types and constants shared by the LSTM accelerator.
//
// All datapath values are Q8.8 fixed point: a signed 16-bit word with 8
// fractional bits. A product of two Q8.8 words is Q16.16 and is carried in a
// signed 32-bit accumulator; sums of products stay 32 bits wide and are only
// brought back to Q8.8 by the rescale step (arithmetic shift right by 8, then
// saturation to the 16-bit range). Q8.8 and the 16/32-bit split follow the
// paper; truncating (not rounding) shift and saturation are this design's
// choice. The piecewise-linear non-linearity has 13 segments, as in the paper.
//
// The register map used by config_regs is also defined here (word addresses).
package lstm_pkg;

  parameter int unsigned DW      = 16;  // Q8.8 data word
  parameter int unsigned FRAC    = 8;   // fractional bits
  parameter int unsigned ACCW    = 32;  // MAC accumulator / product width
  parameter int unsigned NSEG    = 13;  // line segments per non-linear module
  parameter int unsigned AXIS_W  = 32;  // DMA stream word
  parameter int unsigned CNT_W   = 16;  // row / column counters
  parameter int unsigned NL_TABLES = 4; // gate A (sigmoid), gate B (tanh), gate C (sigmoid), ewise (tanh)
  parameter int unsigned REG_AW  = 9;   // configuration register word address

  typedef logic signed [DW-1:0]   q88_t;
  typedef logic signed [ACCW-1:0] acc_t;

  // One line segment y = a*x + b, used while x < lim.
  typedef struct packed {
    q88_t a;
    q88_t b;
    q88_t lim;
  } seg_cfg_t;

  typedef seg_cfg_t [NSEG-1:0] nl_cfg_t;

  // Stages of one operation. ST_IC: i and c~; ST_FO: f and o;
  // ST_EW: c and h; ST_OUT: the extra output matrix-vector product.
  typedef enum logic [2:0] {
    ST_IDLE = 3'd0,
    ST_IC   = 3'd1,
    ST_FO   = 3'd2,
    ST_EW   = 3'd3,
    ST_OUT  = 3'd4
  } stage_e;

  typedef enum logic {
    OP_LSTM = 1'b0,   // one LSTM layer time step (stages IC, FO, EW)
    OP_OUT  = 1'b1    // final output layer y = Wy h + by
  } op_e;

  // Register map (word addresses)
  localparam logic [REG_AW-1:0] REG_CTRL   = 9'h000; // W: bit0 start, bit1 op.  R: bit1 op
  localparam logic [REG_AW-1:0] REG_STATUS = 9'h001; // R: bit0 busy, bit1 done, bits4:2 stage, bit5 saturated
  localparam logic [REG_AW-1:0] REG_ROWS   = 9'h002; // weight matrix height
  localparam logic [REG_AW-1:0] REG_COLS   = 9'h003; // stream length of one row (padding and bias included)
  localparam logic [REG_AW-1:0] REG_NL_BASE = 9'h100; // + table*64 + seg*4 + field (0 a, 1 b, 2 lim)

  // Q16.16 (or any 32-bit value with 16 fractional bits) to Q8.8:
  // arithmetic shift right by FRAC, saturate to the signed 16-bit range.
  function automatic q88_t sat_q88(input acc_t v);
    acc_t s;
    s = v >>> FRAC;
    if (s > acc_t'(32767))       return q88_t'(16'sh7FFF);
    else if (s < -acc_t'(32768)) return q88_t'(16'sh8000);
    else                         return q88_t'(s[DW-1:0]);
  endfunction

  function automatic logic sat_hit(input acc_t v);
    acc_t s;
    s = v >>> FRAC;
    return (s > acc_t'(32767)) || (s < -acc_t'(32768));
  endfunction

endpackage
