// tb_mive_vec_array -- self-checking test of the L-lane vector muladd array.
//
// Random operand selections (B from X / scalar / immediate / pvec_b, C from
// zero / scalar / immediate / pvec_c, any of the four scalars broadcast) are
// applied to random X; every lane is compared with ((X*B) >>> shamt) +/- C
// computed here.  In PWL mode every lane must be within 4% of 1.0 of
// 2^15 * e^(X/16) for X <= 0 (and 0 below X = -127).
`timescale 1ns/1ps
module tb_mive_vec_array;
  import mive_pkg::*;

  localparam int L = 8;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  word_t x [L], pb [L], pc [L], y [L];
  word_t mold, mnew, sold, snew, imm;
  v_ctl_t ctl;

  mive_vec_array #(.L(L)) dut (.x(x), .pvec_b(pb), .pvec_c(pc), .mold(mold), .mnew(mnew),
                               .sold(sold), .snew(snew), .imm(imm), .ctl(ctl), .y(y));

  initial begin
    word_t sc, bb, cc, e;
    longint p;
    real r, err;
    for (int n = 0; n < 3000; n++) begin
      for (int l = 0; l < L; l++) begin
        x[l]  = word_t'($urandom_range(0, 1) ? $urandom() : $urandom_range(0, 4095) - 2048);
        pb[l] = word_t'($urandom());
        pc[l] = word_t'($urandom());
      end
      mold = word_t'($urandom()); mnew = word_t'($urandom());
      sold = word_t'($urandom()); snew = word_t'($urandom()); imm = word_t'($urandom());
      ctl.b = vb_sel_t'($urandom_range(0, 3));
      ctl.c = vc_sel_t'($urandom_range(0, 3));
      ctl.sc = vsc_sel_t'($urandom_range(0, 3));
      ctl.sub = $urandom_range(0, 1) == 1;
      ctl.shamt = SHW'($urandom_range(0, 40));
      ctl.pwl = 1'b0;
      #1;
      sc = (ctl.sc == VSC_SOLD) ? sold : (ctl.sc == VSC_MOLD) ? mold : (ctl.sc == VSC_MNEW) ? mnew : snew;
      for (int l = 0; l < L; l++) begin
        bb = (ctl.b == VB_X) ? x[l] : (ctl.b == VB_SCALAR) ? sc : (ctl.b == VB_IMM) ? imm : pb[l];
        cc = (ctl.c == VC_ZERO) ? '0 : (ctl.c == VC_SCALAR) ? sc : (ctl.c == VC_IMM) ? imm : pc[l];
        p = (longint'(x[l]) * longint'(bb)) >>> ctl.shamt;
        e = word_t'(p[31:0]) + (ctl.sub ? -cc : cc);
        checks++;
        if (y[l] != e) begin
          failures++; $display("FAIL lane %0d b=%0d c=%0d sc=%0d y=%0d exp=%0d", l, ctl.b, ctl.c, ctl.sc, y[l], e);
        end
      end
    end
    ctl.pwl = 1'b1;
    for (int n = 0; n < 200; n++) begin
      for (int l = 0; l < L; l++) x[l] = -word_t'($urandom_range(0, 160));
      #1;
      for (int l = 0; l < L; l++) begin
        r = (x[l] < -127) ? 0.0 : 32768.0 * $exp(real'(x[l]) / 16.0);
        err = real'(y[l]) - r; if (err < 0) err = -err;
        checks++;
        if (err > 0.04 * 32768.0 || (x[l] < -127 && y[l] != 0)) begin
          failures++; $display("FAIL pwl lane %0d x=%0d y=%0d ref=%f", l, x[l], y[l], r);
        end
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
