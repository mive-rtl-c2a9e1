// mive_muladd -- one multiply-add operator of MIVE, with its local PWL ROM.
//
// Computes, in one combinational pass,
//     y = ((A * B) >>> SH) + C        (sub = 0)
//     y = ((A * B) >>> SH) + ~C + 1   (sub = 1)
// on DW-bit signed operands.  The full 2*DW-bit product is shifted right
// arithmetically before it is truncated to DW bits, so fixed-point products
// can be rescaled in the same operation; the sum wraps modulo 2^DW.
// Subtraction is done by conditionally complementing the right-hand operand C,
// as the paper describes.  Addition, subtraction, squaring (A = B) and general
// multiply-add are all configurations of the same datapath.
//
// PWL mode (pwl = 1): A is the argument of a piecewise-linear approximation.
// The local ROM (mive_pwl_rom) replaces the multiplier inputs and addend by
// the segment offset, slope and intercept and supplies the shift, so the same
// multiplier and adder evaluate  y = b_k + ((a_k * off) >>> sh_k).
// The operand shift SH is not used in PWL mode and sub is ignored.
// SCALAR_FNS selects the ROM contents: 1 for the scalar unit (e^x, 1/S,
// 1/sqrt(S), (i-1)/i), 0 for a vector lane (e^x only), following the paper.
module mive_muladd
  import mive_pkg::*;
#(
  parameter bit SCALAR_FNS = 1'b1
) (
  input  word_t          a,
  input  word_t          b,
  input  word_t          c,
  input  logic           sub,
  input  logic [SHW-1:0] shamt,
  input  logic           pwl,
  input  pwl_fn_t        fn,
  output word_t          y
);

  pwl_coef_t coef;

  mive_pwl_rom #(.SCALAR_FNS(SCALAR_FNS)) u_rom (
    .fn   (fn),
    .x    (a),
    .coef (coef)
  );

  word_t                  op_a, op_b, op_c;
  logic [SHW-1:0]         op_sh;
  logic                   op_sub;
  logic signed [2*DW-1:0] prod, prod_sh;

  always_comb begin
    op_a   = pwl ? coef.off : a;
    op_b   = pwl ? coef.a   : b;
    op_c   = pwl ? coef.b   : c;
    op_sh  = pwl ? coef.shamt  : shamt;
    op_sub = pwl ? 1'b0     : sub;
    prod    = op_a * op_b;
    prod_sh = prod >>> op_sh;
    y       = word_t'(prod_sh[DW-1:0]) + (op_sub ? (~op_c + word_t'(1)) : op_c);
  end

endmodule
