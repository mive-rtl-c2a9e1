// mive_vec_array -- the L parallel vector muladd units of MIVE.
//
// Lane l computes  y[l] = ((X[l] * B) >>> shamt) +/- C  with mive_muladd, or, in
// PWL mode, the exponential approximation of X[l] from the lane's own ROM.
// Operand A is always the lane's X element.  Operand B is X[l] itself
// (squaring), a scalar register broadcast to all lanes, the immediate, or the
// lane's element of the external parameter vector pvec_b (e.g. gamma).
// Operand C is zero, the broadcast scalar, the immediate, or pvec_c (e.g. beta).
// Combinational; the result is written into X at the end of the cycle.
// The figure of the paper draws S_old as the scalar feeding the lanes; the
// algorithms also subtract M_new and M_old from X, so this design lets the
// instruction pick which scalar register is broadcast (ctl.sc).  Where the
// learned gamma/beta come from is not stated; here they enter on pvec_b/pvec_c.
module mive_vec_array
  import mive_pkg::*;
#(
  parameter int unsigned L = 8
) (
  input  word_t  x      [L],
  input  word_t  pvec_b [L],
  input  word_t  pvec_c [L],
  input  word_t  mold,
  input  word_t  mnew,
  input  word_t  sold,
  input  word_t  snew,
  input  word_t  imm,
  input  v_ctl_t ctl,
  output word_t  y      [L]
);

  word_t sc;
  always_comb begin
    unique case (ctl.sc)
      VSC_SOLD: sc = sold;
      VSC_MOLD: sc = mold;
      VSC_MNEW: sc = mnew;
      default:  sc = snew;
    endcase
  end

  for (genvar l = 0; l < int'(L); l++) begin : g_lane
    word_t b, c;
    always_comb begin
      unique case (ctl.b)
        VB_X:      b = x[l];
        VB_SCALAR: b = sc;
        VB_IMM:    b = imm;
        default:   b = pvec_b[l];
      endcase
      unique case (ctl.c)
        VC_ZERO:   c = '0;
        VC_SCALAR: c = sc;
        VC_IMM:    c = imm;
        default:   c = pvec_c[l];
      endcase
    end

    mive_muladd #(.SCALAR_FNS(1'b0)) u_muladd (
      .a   (x[l]),
      .b   (b),
      .c   (c),
      .sub (ctl.sub),
      .shamt  (ctl.shamt),
      .pwl (ctl.pwl),
      .fn  (FN_EXP),
      .y   (y[l])
    );
  end

endmodule
