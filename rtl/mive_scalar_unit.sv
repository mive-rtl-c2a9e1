// mive_scalar_unit -- scalar muladd of MIVE with its four local registers.
//
// One mive_muladd with the full PWL ROM (e^x, 1/S, 1/sqrt(S), (i-1)/i) takes
// its operands A, B and C from M_old, M_new, S_old, S_new, the instruction
// immediate or zero.  Its result can be written to any of the four registers
// in the same clock edge.  The register input multiplexers follow the
// paper's hardware figure:
//     M_old <- muladd result | M_new
//     M_new <- muladd result | vecsum result
//     S_new <- muladd result | vecsum result
//     S_old <- muladd result
// The unit runs the LayerNorm and Softmax correction routines (one line of
// Alg. LNC/SMC per instruction) and the normalisation-factor computation.
// Timing: operands are read from the registers, the result is registered at
// the next rising edge when en and the register's write enable are set; one
// operation per cycle.  Registers reset to zero (reset value is this design's
// choice; the paper does not state one).
module mive_scalar_unit
  import mive_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,        // instruction valid
  input  s_ctl_t   s,
  input  reg_ctl_t r,
  input  word_t    imm,
  input  word_t    vs_y,      // vecsum result
  output word_t    mold,
  output word_t    mnew,
  output word_t    sold,
  output word_t    snew,
  output word_t    mul_y      // muladd result (observable)
);

  function automatic word_t pick(input sop_sel_t sel, input word_t mo, input word_t mn,
                                 input word_t so, input word_t sn, input word_t im);
    unique case (sel)
      SOP_MOLD: return mo;
      SOP_MNEW: return mn;
      SOP_SOLD: return so;
      SOP_SNEW: return sn;
      SOP_IMM:  return im;
      default:  return '0;
    endcase
  endfunction

  word_t op_a, op_b, op_c;
  assign op_a = pick(s.a, mold, mnew, sold, snew, imm);
  assign op_b = pick(s.b, mold, mnew, sold, snew, imm);
  assign op_c = pick(s.c, mold, mnew, sold, snew, imm);

  mive_muladd #(.SCALAR_FNS(1'b1)) u_muladd (
    .a   (op_a),
    .b   (op_b),
    .c   (op_c),
    .sub (s.sub),
    .shamt  (s.shamt),
    .pwl (s.pwl),
    .fn  (s.fn),
    .y   (mul_y)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mold <= '0;
      mnew <= '0;
      sold <= '0;
      snew <= '0;
    end else if (en) begin
      if (r.mold_we) mold <= r.mold_from_mnew ? mnew : mul_y;
      if (r.mnew_we) mnew <= r.mnew_from_vs   ? vs_y : mul_y;
      if (r.snew_we) snew <= r.snew_from_vs   ? vs_y : mul_y;
      if (r.sold_we) sold <= mul_y;
    end
  end

endmodule
