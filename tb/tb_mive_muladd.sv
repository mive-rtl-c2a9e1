// tb_mive_muladd -- self-checking test of one multiply-add operator.
//
// Plain mode: random A, B, C, shift and add/subtract; the expected value is
// the 64-bit product shifted right arithmetically, truncated to 32 bits, plus
// or minus C, computed here with longint arithmetic.  Corner operands (most
// negative, -1, 0) are included.  PWL mode: the result must lie within a
// stated tolerance of e^(x/16)*2^15, 2^37/x, 2^30/sqrt(x) and 2^15*(x-1)/x
// computed with real arithmetic; a vector-lane instance (SCALAR_FNS = 0) must
// give the exponential for every function select.
`timescale 1ns/1ps
module tb_mive_muladd;
  import mive_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  word_t a, b, c, y, yv;
  logic sub, pwl;
  logic [SHW-1:0] shamt;
  pwl_fn_t fn;

  mive_muladd #(.SCALAR_FNS(1'b1)) dut  (.a, .b, .c, .sub, .shamt, .pwl, .fn, .y);
  mive_muladd #(.SCALAR_FNS(1'b0)) dutv (.a, .b, .c, .sub, .shamt, .pwl, .fn, .y(yv));

  function automatic word_t pick_word();
    case ($urandom_range(0, 7))
      0: return word_t'(32'h8000_0000);
      1: return word_t'(-1);
      2: return '0;
      3: return word_t'($urandom_range(0, 255)) - 128;
      default: return word_t'($urandom());
    endcase
  endfunction

  function automatic real fref(pwl_fn_t f, real v);
    case (f)
      FN_EXP:   return 32768.0 * $exp(v / 16.0);
      FN_RECIP: return 137438953472.0 / v;
      FN_RSQRT: return 1073741824.0 / $sqrt(v);
      default:  return 32768.0 * (v - 1.0) / v;
    endcase
  endfunction

  task automatic pwl_check(pwl_fn_t f, word_t v);
    real r, err, tol;
    pwl = 1'b1; fn = f; a = v; b = pick_word(); c = pick_word(); shamt = SHW'($urandom()); sub = 1'b1;
    #1;
    r = fref(f, real'(v));
    err = real'(y) - r; if (err < 0) err = -err;
    tol = (f == FN_EXP) ? 0.04 * 32768.0 : (f == FN_LNC) ? 0.01 * 32768.0 : 0.005 * r + 1.0;
    checks++;
    if (err > tol) begin failures++; $display("FAIL pwl fn=%0d x=%0d y=%0d ref=%f", f, v, y, r); end
    r = fref(FN_EXP, real'(v));
    err = real'(yv) - r; if (err < 0) err = -err;
    checks++;
    if (f == FN_EXP && err > 0.04 * 32768.0) begin failures++; $display("FAIL lane exp x=%0d y=%0d", v, yv); end
    else if (f != FN_EXP && yv != dutv.u_rom.exp_coef.b + word_t'((longint'(dutv.u_rom.exp_coef.a) * longint'(dutv.u_rom.exp_coef.off)) >>> 3)) begin
      failures++; $display("FAIL lane rom did not stay on exp");
    end
  endtask

  initial begin
    longint p, e;
    pwl = 1'b0; fn = FN_EXP;
    for (int n = 0; n < 3000; n++) begin
      a = pick_word(); b = pick_word(); c = pick_word();
      shamt = SHW'($urandom_range(0, 63)); sub = $urandom_range(0, 1) == 1;
      #1;
      p = longint'(a) * longint'(b);
      p = p >>> shamt;
      e = longint'(word_t'(p[31:0])) + (sub ? -longint'(c) : longint'(c));
      checks++;
      if (y != word_t'(e[31:0])) begin
        failures++;
        $display("FAIL a=%0d b=%0d c=%0d shamt=%0d sub=%0b y=%0d exp=%0d", a, b, c, shamt, sub, y, word_t'(e[31:0]));
      end
      checks++;
      if (yv != y) begin failures++; $display("FAIL lane instance differs in plain mode"); end
    end
    for (int v = 0; v >= -127; v--) pwl_check(FN_EXP, word_t'(v));
    for (int n = 0; n < 300; n++) begin
      pwl_check(FN_RECIP, word_t'(($urandom() >> 1) >> $urandom_range(0, 24)) + 64);
      pwl_check(FN_RSQRT, word_t'(($urandom() >> 1) >> $urandom_range(0, 30)) + 1);
      pwl_check(FN_LNC,   word_t'($urandom_range(1, 4096)));
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
