// mive_top -- MIVE, a minimalist integer vector engine for Softmax, LayerNorm
// and RMSNorm.
//
// Datapath (after the paper's hardware figure):
//   * on-chip buffer (mive_buffer): ROWS x L INT8 elements, a pop/push queue;
//   * vector register X (mive_xreg), loaded from the buffer head or from
//   * the L-lane vector muladd array (mive_vec_array), which reads X;
//   * vecsum (mive_vecsum): sum / max tree over X (and M_old), written to
//     M_new or S_new;
//   * scalar unit (mive_scalar_unit): scalar muladd with PWL ROM and the
//     registers M_old, M_new, S_old, S_new.
// Control: one instruction word (mive_pkg::instr_t) per cycle while
// instr_valid is high.  Its fields drive every select and write enable
// directly; there is no decoder and no internal sequencer, so the host walks
// the loops of the three algorithms by issuing instructions.  All fields act
// in the same cycle: operands are read from the current register contents and
// every result is written at the next rising edge, so one instruction may, for
// example, reduce X into S_new while the scalar unit updates S_old.
// External interface (this design's choice; the paper only says the engine is
// driven through an ISA-level interface and that results go back through the
// on-chip buffer to external memory):
//   ext_row / push_ext : a row from external memory is appended to the buffer;
//   out_row / out_valid: the buffer head, valid in a cycle that pops it;
//   pvec_b / pvec_c    : per-lane operands for the vector muladd (gamma, beta).
// Timing: one instruction per cycle, no stalls; the host must not pop an
// empty buffer or push into a full one (asserted in mive_buffer).
module mive_top
  import mive_pkg::*;
#(
  parameter int unsigned L    = 8,
  parameter int unsigned ROWS = 1024
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      instr_valid,
  input  instr_t                    instr,
  input  elem_t                     ext_row [L],
  input  word_t                     pvec_b  [L],
  input  word_t                     pvec_c  [L],
  output elem_t                     out_row [L],
  output logic                      out_valid,
  output logic [$clog2(ROWS+1)-1:0] buf_count,
  output logic                      buf_empty,
  output logic                      buf_full
);

  word_t x      [L];
  word_t vmul_y [L];
  elem_t head   [L];
  word_t mold, mnew, sold, snew, vs_y, smul_y;

  mive_buffer #(.L(L), .ROWS(ROWS)) u_buffer (
    .clk      (clk),
    .rst_n    (rst_n),
    .pop      (instr_valid && instr.mv.pop),
    .push     (instr_valid && instr.mv.push),
    .push_ext (instr.mv.push_ext),
    .x        (x),
    .ext_row  (ext_row),
    .head     (head),
    .count    (buf_count),
    .empty    (buf_empty),
    .full     (buf_full)
  );

  mive_xreg #(.L(L)) u_xreg (
    .clk      (clk),
    .rst_n    (rst_n),
    .en       (instr_valid),
    .we       (instr.mv.x_we),
    .from_buf (instr.mv.x_from_buf),
    .mul_y    (vmul_y),
    .buf_row  (head),
    .x        (x)
  );

  mive_vec_array #(.L(L)) u_vec (
    .x      (x),
    .pvec_b (pvec_b),
    .pvec_c (pvec_c),
    .mold   (mold),
    .mnew   (mnew),
    .sold   (sold),
    .snew   (snew),
    .imm    (instr.imm),
    .ctl    (instr.v),
    .y      (vmul_y)
  );

  mive_vecsum #(.L(L)) u_vecsum (
    .x    (x),
    .mold (mold),
    .ctl  (instr.vs),
    .y    (vs_y)
  );

  mive_scalar_unit u_scalar (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (instr_valid),
    .s     (instr.s),
    .r     (instr.r),
    .imm   (instr.imm),
    .vs_y  (vs_y),
    .mold  (mold),
    .mnew  (mnew),
    .sold  (sold),
    .snew  (snew),
    .mul_y (smul_y)
  );

  assign out_row   = head;
  assign out_valid = instr_valid && instr.mv.pop;

endmodule
