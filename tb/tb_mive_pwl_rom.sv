// tb_mive_pwl_rom -- self-checking test of the PWL coefficient ROM.
//
// For random and corner arguments of each function it forms
// y = b + ((a * off) >>> shamt) from the ROM outputs and compares it with the chord
// of the function computed here from real arithmetic ($exp, $sqrt, division):
// exactly for e^x, within 2 LSB for the octave tables (end points rounded in
// different ways).  It also checks y against the exact function: e^x within
// 4% of 1.0, 1/S and 1/sqrt(S) within 0.5%, (i-1)/i within 1% of 1.0.
// A second instance with SCALAR_FNS = 0 must return the exponential whatever
// function is selected.
`timescale 1ns/1ps
module tb_mive_pwl_rom;
  import mive_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  pwl_fn_t   fn;
  word_t     x;
  pwl_coef_t coef, coef_v;

  mive_pwl_rom #(.SCALAR_FNS(1'b1)) dut  (.fn(fn), .x(x), .coef(coef));
  mive_pwl_rom #(.SCALAR_FNS(1'b0)) dutv (.fn(fn), .x(x), .coef(coef_v));

  function automatic longint eval(pwl_coef_t c);
    longint p;
    p = longint'(c.a) * longint'(c.off);
    return longint'(c.b) + (p >>> c.shamt);
  endfunction

  function automatic real fref(pwl_fn_t f, real v);
    case (f)
      FN_EXP:   return 32768.0 * $exp(v / 16.0);
      FN_RECIP: return 137438953472.0 / v;
      FN_RSQRT: return 1073741824.0 / $sqrt(v);
      default:  return 32768.0 * (v - 1.0) / v;
    endcase
  endfunction

  function automatic longint fint(pwl_fn_t f, longint v);
    real r;
    r = fref(f, real'(v));
    if (r > 2147483647.0) return 64'sd2147483647;
    return longint'($floor(r + 0.5));
  endfunction

  // Expected chord value for argument v.
  function automatic longint chord(pwl_fn_t f, longint v);
    longint t, k, o, e0, e1, x0, x1;
    int p;
    if (f == FN_EXP) begin
      t = (v > 0) ? 0 : -v;
      if (t >= 128) return 0;
      k = t / 8; o = t % 8;
      e0 = longint'($floor(32768.0 * $exp(-real'(k) / 2.0) + 0.5));
      e1 = longint'($floor(32768.0 * $exp(-real'(k + 1) / 2.0) + 0.5));
      return e0 + (((e1 - e0) * o) >>> 3);
    end
    if (v <= 0) v = 1;
    p = 0;
    for (int n = 0; n < 62; n++) if (v >= (64'sd1 <<< n)) p = n;
    if (p < 3) return fint(f, v);
    x0 = v & ~((64'sd1 <<< (p - 3)) - 1);
    x1 = x0 + (64'sd1 <<< (p - 3));
    o  = v - x0;
    return fint(f, x0) + (((fint(f, x1) - fint(f, x0)) * o) >>> (p - 3));
  endfunction

  task automatic check_one(pwl_fn_t f, word_t v);
    longint y, e, yv;
    real tr, err;
    fn = f; x = v;
    #1;
    y = eval(coef);
    e = chord(f, longint'(v));
    checks++;
    if ((f == FN_EXP && y != e) || (f != FN_EXP && (y - e > 2 || e - y > 2))) begin
      failures++;
      $display("FAIL chord fn=%0d x=%0d y=%0d expected %0d", f, v, y, e);
    end
    // against the exact function
    if (f == FN_EXP) begin
      tr = (v > 0) ? 32768.0 : fref(f, real'(v));
      err = real'(y) - tr; if (err < 0) err = -err;
      checks++;
      if (err > 0.04 * 32768.0) begin failures++; $display("FAIL exp x=%0d y=%0d ref=%f", v, y, tr); end
    end else if (v >= 1) begin
      tr = fref(f, real'(v));
      if (tr < 2147483647.0) begin
        err = real'(y) - tr; if (err < 0) err = -err;
        checks++;
        if ((f == FN_LNC && err > 0.01 * 32768.0) || (f != FN_LNC && err > 0.005 * tr + 1.0)) begin
          failures++; $display("FAIL fn=%0d x=%0d y=%0d ref=%f", f, v, y, tr);
        end
      end
    end
    // vector-lane ROM always evaluates the exponential
    yv = eval(coef_v);
    e  = chord(FN_EXP, longint'(v));
    checks++;
    if (yv != e) begin failures++; $display("FAIL lane rom fn=%0d x=%0d y=%0d exp %0d", f, v, yv, e); end
  endtask

  initial begin
    int v;
    // exponential: every argument in range and some beyond
    for (v = 8; v >= -140; v--) check_one(FN_EXP, word_t'(v));
    check_one(FN_EXP, word_t'(-2147483647 - 1));
    // octave functions: small values, powers of two, random magnitudes
    for (int f = 1; f < 4; f++) begin
      for (v = -2; v <= 40; v++) check_one(pwl_fn_t'(f), word_t'(v));
      for (int p = 2; p < 31; p++) check_one(pwl_fn_t'(f), word_t'(1 << p));
      check_one(pwl_fn_t'(f), word_t'(2147483647));
      for (int n = 0; n < 400; n++) begin
        int shamt;
        shamt = $urandom_range(0, 30);
        check_one(pwl_fn_t'(f), word_t'(($urandom() >> 1) >> shamt) + 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
