// tb_mive_scalar_unit -- self-checking test of the scalar muladd and its four
// registers M_old, M_new, S_old, S_new.
//
// Part 1: random plain-mode instructions with random operand selects, write
// enables and multiplexer selects; a reference copy of the four registers is
// updated here after every clock edge and compared.  en = 0 must freeze them.
// Part 2: the Softmax correction routine (Alg. SMC, three instructions) from
// known register values; the corrected S_old must match
// S_old*e^((M_old-M_new)/16) + S_new computed with real arithmetic (3.5% of the rescaled
// term: the chord error of the 16-segment exponential).
`timescale 1ns/1ps
module tb_mive_scalar_unit;
  import mive_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, en;
  s_ctl_t s;
  reg_ctl_t r;
  word_t imm, vs_y, mold, mnew, sold, snew, mul_y;

  mive_scalar_unit dut (.clk, .rst_n, .en, .s, .r, .imm, .vs_y, .mold, .mnew, .sold, .snew, .mul_y);

  word_t rm [4];  // reference: 0 mold 1 mnew 2 sold 3 snew

  function automatic word_t sel(sop_sel_t k);
    case (k)
      SOP_MOLD: return rm[0];
      SOP_MNEW: return rm[1];
      SOP_SOLD: return rm[2];
      SOP_SNEW: return rm[3];
      SOP_IMM:  return imm;
      default:  return '0;
    endcase
  endfunction

  task automatic cmp(string tag);
    checks++;
    if (mold != rm[0] || mnew != rm[1] || sold != rm[2] || snew != rm[3]) begin
      failures++;
      $display("FAIL %s regs %0d %0d %0d %0d exp %0d %0d %0d %0d", tag, mold, mnew, sold, snew, rm[0], rm[1], rm[2], rm[3]);
    end
  endtask

  // one instruction through the unit
  task automatic issue(s_ctl_t si, reg_ctl_t ri, word_t im);
    @(negedge clk);
    s = si; r = ri; imm = im; en = 1'b1;
    @(negedge clk);
    en = 1'b0;
  endtask

  initial begin
    word_t e, mv;
    longint p;
    real ref_s;
    rst_n = 0; en = 0; s = '0; r = '0; imm = '0; vs_y = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    rm = '{default: '0};
    @(negedge clk);
    cmp("reset");
    for (int n = 0; n < 3000; n++) begin
      s.a = sop_sel_t'($urandom_range(0, 5));
      s.b = sop_sel_t'($urandom_range(0, 5));
      s.c = sop_sel_t'($urandom_range(0, 5));
      s.sub = $urandom_range(0, 1) == 1;
      s.pwl = 1'b0; s.fn = FN_EXP;
      s.shamt = SHW'($urandom_range(0, 40));
      r = reg_ctl_t'($urandom());
      imm = word_t'($urandom()); vs_y = word_t'($urandom());
      en = $urandom_range(0, 7) != 0;
      #1;
      p = (longint'(sel(s.a)) * longint'(sel(s.b))) >>> s.shamt;
      e = word_t'(p[31:0]) + (s.sub ? -sel(s.c) : sel(s.c));
      checks++;
      if (mul_y != e) begin failures++; $display("FAIL mul_y=%0d exp=%0d", mul_y, e); end
      @(posedge clk);
      mv = rm[1];
      if (en) begin
        if (r.mold_we) rm[0] = r.mold_from_mnew ? mv : e;
        if (r.mnew_we) rm[1] = r.mnew_from_vs ? vs_y : e;
        if (r.snew_we) rm[3] = r.snew_from_vs ? vs_y : e;
        if (r.sold_we) rm[2] = e;
      end
      @(negedge clk);
      cmp("random");
    end
    // ---- Softmax correction: S_old <- S_old*e^(M_old-M_new) + S_new ----
    for (int n = 0; n < 200; n++) begin
      int mo, mn, so, sn;
      mo = $urandom_range(0, 255) - 128;
      mn = mo + $urandom_range(0, 100);
      so = $urandom_range(32768, 4000000);
      sn = $urandom_range(32768, 300000);
      // load registers through the muladd: reg <- 0*0 + imm
      issue('{a: SOP_ZERO, b: SOP_ZERO, c: SOP_IMM, sub: 0, pwl: 0, fn: FN_EXP, shamt: 0}, '{mold_we: 1, default: 0}, word_t'(mo));
      issue('{a: SOP_ZERO, b: SOP_ZERO, c: SOP_IMM, sub: 0, pwl: 0, fn: FN_EXP, shamt: 0}, '{mnew_we: 1, default: 0}, word_t'(mn));
      issue('{a: SOP_ZERO, b: SOP_ZERO, c: SOP_IMM, sub: 0, pwl: 0, fn: FN_EXP, shamt: 0}, '{sold_we: 1, default: 0}, word_t'(so));
      vs_y = word_t'(sn);
      issue('{a: SOP_ZERO, b: SOP_ZERO, c: SOP_ZERO, sub: 0, pwl: 0, fn: FN_EXP, shamt: 0}, '{snew_we: 1, snew_from_vs: 1, default: 0}, '0);
      // Alg. SMC
      issue('{a: SOP_MOLD, b: SOP_IMM, c: SOP_MNEW, sub: 1, pwl: 0, fn: FN_EXP, shamt: 0}, '{mold_we: 1, default: 0}, word_t'(1));
      issue('{a: SOP_MOLD, b: SOP_ZERO, c: SOP_ZERO, sub: 0, pwl: 1, fn: FN_EXP, shamt: 0}, '{mold_we: 1, default: 0}, '0);
      issue('{a: SOP_SOLD, b: SOP_MOLD, c: SOP_SNEW, sub: 0, pwl: 0, fn: FN_EXP, shamt: 15}, '{sold_we: 1, default: 0}, '0);
      ref_s = real'(so) * $exp(real'(mo - mn) / 16.0) + real'(sn);
      checks++;
      if (((real'(sold) > ref_s) ? real'(sold) - ref_s : ref_s - real'(sold)) >
          0.035 * real'(so) * $exp(real'(mo - mn) / 16.0) + 2.0) begin
        failures++; $display("FAIL SMC mo=%0d mn=%0d so=%0d sn=%0d sold=%0d ref=%f", mo, mn, so, sn, sold, ref_s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
