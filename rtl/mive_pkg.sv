// mive_pkg -- shared types and constants of the MIVE integer vector engine.
//
// MIVE runs LayerNorm, RMSNorm and Softmax on one small datapath: an array of
// L multiply-add lanes working on a vector register X, a binary-tree reduction
// unit (vecsum), and one scalar multiply-add unit with four scalar registers
// (M_old, M_new, S_old, S_new).  There is no instruction decoder: every field
// of the instruction word below drives a multiplexer select, a mode bit or a
// write enable directly, and every instruction completes in one clock cycle.
//
// Number formats (this design's choice, the paper only states INT8 in/out and
// "sufficiently wide" intermediates):
//   * inputs/outputs in the on-chip buffer are signed 8-bit;
//   * X lanes and scalar registers are DW = 32-bit signed integers, used as
//     fixed-point values whose binary point the program tracks;
//   * the exponential PWL takes its argument in Q4 (value/16) and returns Q15;
//   * 1/S returns 2^37/S, 1/sqrt(S) returns 2^30/sqrt(S), and the LayerNorm
//     correction factor (i-1)/i returns Q15; all three saturate at 2^31-1.
package mive_pkg;

  localparam int unsigned DW = 32;          // datapath word (X lanes, scalar regs)
  localparam int unsigned EW = 8;           // element width in the buffer (INT8)
  localparam int unsigned SHW = 6;          // width of a shift amount

  typedef logic signed [DW-1:0] word_t;
  typedef logic signed [EW-1:0] elem_t;

  // PWL function selector.
  typedef enum logic [1:0] {
    FN_EXP   = 2'd0,   // e^(x/16), x <= 0, Q15 result
    FN_RECIP = 2'd1,   // 2^37 / x
    FN_RSQRT = 2'd2,   // 2^30 / sqrt(x)
    FN_LNC   = 2'd3    // 2^15 * (x-1)/x
  } pwl_fn_t;

  // Coefficients presented by the PWL ROM for one input value:
  // y = b + ((a * off) >>> shamt).
  typedef struct packed {
    word_t            off;
    word_t            a;
    word_t            b;
    logic [SHW-1:0]   shamt;
  } pwl_coef_t;

  // Exponential table: EXP_TAB[k] = round(2^15 * e^(-k/2)), k = 0..16.
  // Segment k covers Q4 arguments -8k-7 .. -8k (real -k/2-7/16 .. -k/2).
  localparam int unsigned EXP_SEGS = 16;
  localparam int EXP_TAB [0:EXP_SEGS] = '{
    32768, 19875, 12055, 7312, 4435, 2690, 1631, 990,
    600, 364, 221, 134, 81, 49, 30, 18, 11
  };

  // Scalar operand select (operands A, B and C of the scalar muladd).
  typedef enum logic [2:0] {
    SOP_ZERO = 3'd0,
    SOP_MOLD = 3'd1,
    SOP_MNEW = 3'd2,
    SOP_SOLD = 3'd3,
    SOP_SNEW = 3'd4,
    SOP_IMM  = 3'd5
  } sop_sel_t;

  // Scalar register broadcast to the vector lanes.
  typedef enum logic [1:0] {
    VSC_SOLD = 2'd0,
    VSC_MOLD = 2'd1,
    VSC_MNEW = 2'd2,
    VSC_SNEW = 2'd3
  } vsc_sel_t;

  // Vector muladd operand B.
  typedef enum logic [1:0] {
    VB_X      = 2'd0,   // the lane's own X element (squaring)
    VB_SCALAR = 2'd1,   // broadcast scalar register
    VB_IMM    = 2'd2,   // instruction immediate
    VB_PVEC   = 2'd3    // external parameter vector (e.g. gamma)
  } vb_sel_t;

  // Vector muladd operand C.
  typedef enum logic [1:0] {
    VC_ZERO   = 2'd0,
    VC_SCALAR = 2'd1,
    VC_IMM    = 2'd2,
    VC_PVEC   = 2'd3    // external parameter vector (e.g. beta)
  } vc_sel_t;

  // Fields of the scalar muladd.
  typedef struct packed {
    sop_sel_t        a;
    sop_sel_t        b;
    sop_sel_t        c;
    logic            sub;     // complement operand C
    logic            pwl;     // take B, C, shift from the PWL ROM (A is the argument)
    pwl_fn_t         fn;
    logic [SHW-1:0]  shamt;
  } s_ctl_t;

  // Write controls of the four scalar registers.  The multiplexer inputs follow
  // the hardware figure: M_old <- {muladd, M_new}, M_new <- {muladd, vecsum},
  // S_new <- {muladd, vecsum}, S_old <- muladd.
  typedef struct packed {
    logic mold_we;  logic mold_from_mnew;
    logic mnew_we;  logic mnew_from_vs;
    logic snew_we;  logic snew_from_vs;
    logic sold_we;
  } reg_ctl_t;

  // vecsum controls.
  typedef struct packed {
    logic max;        // 0: sum of the lanes, 1: maximum of the lanes
    logic with_mold;  // max mode: include M_old as an extra candidate
  } vs_ctl_t;

  // Fields of the vector muladd array.
  typedef struct packed {
    vb_sel_t         b;
    vc_sel_t         c;
    vsc_sel_t        sc;      // which scalar register is broadcast
    logic            sub;
    logic            pwl;     // exponential PWL on every lane
    logic [SHW-1:0]  shamt;
  } v_ctl_t;

  // X register and buffer controls.
  typedef struct packed {
    logic x_we;         // write X
    logic x_from_buf;   // 0: from the muladd array, 1: from the buffer head
    logic pop;          // advance the buffer head (head row goes to X and/or out)
    logic push;         // append a row to the buffer tail
    logic push_ext;     // 0: push X (saturated to INT8), 1: push the external row
  } mv_ctl_t;

  // One instruction: all fields act in the same cycle.
  typedef struct packed {
    s_ctl_t   s;
    reg_ctl_t r;
    vs_ctl_t  vs;
    v_ctl_t   v;
    mv_ctl_t  mv;
    word_t    imm;
  } instr_t;

  localparam instr_t NOP = '0;

  // Saturate a word to a signed EW-bit element.
  function automatic elem_t sat_elem(input word_t w);
    if (w > word_t'(2**(EW-1) - 1))       return elem_t'(2**(EW-1) - 1);
    else if (w < -word_t'(2**(EW-1)))     return elem_t'(-(2**(EW-1)));
    else                                  return elem_t'(w);
  endfunction

endpackage
