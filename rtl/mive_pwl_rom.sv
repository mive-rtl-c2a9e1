// mive_pwl_rom -- piecewise-linear (PWL) coefficient ROM with segment selection.
//
// For an argument x and a function fn it returns the coefficients with which a
// muladd datapath evaluates the PWL approximation in one multiply-add:
//     y = b + ((a * off) >>> shamt)
// where b is the function value at the start of x's segment, a the rise of the
// function over the segment, off the position of x inside the segment and shamt
// the base-2 logarithm of the segment width.  Because off is simply the low
// bits of x, no subtraction is needed before the multiplier.
//
// Functions and segmentation (the paper names the functions and says their
// coefficients sit in local ROMs; segment counts and formats are this design's):
//   FN_EXP   y = 2^15 * e^(x/16) for x <= 0.  t = -x is cut into 16 uniform
//            segments of 8 (0.5 in real terms); t >= 128 gives 0.  Chord end
//            points are EXP_TAB in mive_pkg.
//   FN_RECIP y = 2^37 / x          \  x >= 1 is cut per octave 2^p..2^(p+1)
//   FN_RSQRT y = 2^30 / sqrt(x)     > into eight equal segments (index {p, three
//   FN_LNC   y = 2^15 * (x-1) / x  /  bits below the MSB}); x = 1..7 are exact.
//            x <= 0 is treated as 1.  Table values are the functions evaluated
//            on the segment end points with integer arithmetic below, rounded
//            and saturated to 2^31-1.
// Purely combinational; ROM contents are computed at elaboration time.
// SCALAR_FNS = 0 keeps only FN_EXP (the vector lanes hold only the exponential
// table, as in the paper); the other selections then also return FN_EXP.
module mive_pwl_rom
  import mive_pkg::*;
#(
  parameter bit SCALAR_FNS = 1'b1
) (
  input  pwl_fn_t   fn,
  input  word_t     x,
  output pwl_coef_t coef
);

  localparam int unsigned SB    = 3;                  // sub-segment bits per octave
  localparam int unsigned SEG   = 1 << SB;            // segments per octave
  localparam int unsigned TAB_N = SEG * (DW - SB);    // entries of the octave tables
  typedef word_t tab_t [0:TAB_N-1];
  localparam longint SAT = 64'sd2147483647;
  typedef longint unsigned u64_t;

  function automatic longint unsigned isqrt(input longint unsigned v);
    longint unsigned op, res, one;
    op  = v;
    res = 0;
    one = 64'd1 << 62;
    for (int n = 0; n < 32; n++) begin
      if (op >= res + one) begin
        op  = op - (res + one);
        res = (res >> 1) + one;
      end else begin
        res = res >> 1;
      end
      one = one >> 2;
    end
    return res;
  endfunction

  function automatic longint fval(input int f, input longint xa);
    longint fr;
    case (f)
      1:       fr = ((64'sd1 <<< 37) + xa / 2) / xa;
      2:       fr = longint'(isqrt((64'd1 << 60) / u64_t'(xa)));
      default: fr = 32768 - ((64'sd32768 + xa / 2) / xa);
    endcase
    return (fr > SAT) ? SAT : fr;
  endfunction

  // slope = 0: b table (value at segment start); slope = 1: a table (rise).
  function automatic tab_t gen_tab(input int f, input bit slope);
    tab_t   t;
    longint x0, x1;
    int     p, j;
    for (int idx = 0; idx < TAB_N; idx++) begin
      if (idx < int'(SEG)) begin
        x0 = (idx == 0) ? 64'sd1 : longint'(idx);
        t[idx] = slope ? '0 : word_t'(fval(f, x0));
      end else begin
        p  = idx / int'(SEG) + int'(SB) - 1;
        j  = idx % int'(SEG);
        x0 = (64'sd1 <<< p) + (longint'(j) <<< (p - int'(SB)));
        x1 = x0 + (64'sd1 <<< (p - int'(SB)));
        t[idx] = slope ? word_t'(fval(f, x1) - fval(f, x0)) : word_t'(fval(f, x0));
      end
    end
    return t;
  endfunction

  localparam tab_t RECIP_B = gen_tab(1, 1'b0);
  localparam tab_t RECIP_A = gen_tab(1, 1'b1);
  localparam tab_t RSQRT_B = gen_tab(2, 1'b0);
  localparam tab_t RSQRT_A = gen_tab(2, 1'b1);
  localparam tab_t LNC_B   = gen_tab(3, 1'b0);
  localparam tab_t LNC_A   = gen_tab(3, 1'b1);

  // ---------------- exponential segment selection ----------------
  pwl_coef_t exp_coef;
  always_comb begin
    logic [DW-1:0] t;
    int unsigned   k;
    k = 0;
    t = (x > 0) ? '0 : DW'(-x);
    exp_coef = '0;
    exp_coef.shamt = SHW'(3);
    if (t < DW'(8 * EXP_SEGS)) begin
      k = int'(t[6:3]);
      exp_coef.off = word_t'({29'd0, t[2:0]});
      exp_coef.b   = word_t'(EXP_TAB[k]);
      exp_coef.a   = word_t'(EXP_TAB[k+1] - EXP_TAB[k]);
    end
  end

  // ---------------- octave segment selection ----------------
  pwl_coef_t oct_coef;
  always_comb begin
    logic [DW-1:0] xv;
    int unsigned   p, idx;
    xv = (x <= 0) ? DW'(1) : DW'(x);
    p  = 0;
    for (int n = 0; n < DW - 1; n++)
      if (xv[n]) p = n;
    oct_coef = '0;
    if (p < SB) begin
      idx = {{(32-SB){1'b0}}, xv[SB-1:0]};
      oct_coef.shamt  = '0;
      oct_coef.off = '0;
    end else begin
      idx = SEG * (p - SB + 1) + {{(32-SB){1'b0}}, xv[p-1 -: SB]};
      oct_coef.shamt  = SHW'(p - SB);
      oct_coef.off = word_t'(xv & ((DW'(1) << (p - SB)) - DW'(1)));
    end
    case (fn)
      FN_RECIP: begin oct_coef.a = RECIP_A[idx]; oct_coef.b = RECIP_B[idx]; end
      FN_RSQRT: begin oct_coef.a = RSQRT_A[idx]; oct_coef.b = RSQRT_B[idx]; end
      default:  begin oct_coef.a = LNC_A[idx];   oct_coef.b = LNC_B[idx];   end
    endcase
  end

  assign coef = (!SCALAR_FNS || fn == FN_EXP) ? exp_coef : oct_coef;

endmodule
