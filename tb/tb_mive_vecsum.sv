// tb_mive_vecsum -- self-checking test of the vecsum reduction tree.
//
// Random vectors (small, full-range and extreme values) are reduced in sum
// mode and in max mode with and without M_old; the expected sum (mod 2^32) and
// maximum are computed here with a plain loop.  The tree is combinational, so
// the result is checked in the same cycle as the inputs change.  L = 8 and a
// second instance with L = 4.
`timescale 1ns/1ps
module tb_mive_vecsum;
  import mive_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  word_t x [8];
  word_t x4 [4];
  word_t mold, y, y4;
  vs_ctl_t ctl;

  mive_vecsum #(.L(8)) dut  (.x(x),  .mold(mold), .ctl(ctl), .y(y));
  mive_vecsum #(.L(4)) dut4 (.x(x4), .mold(mold), .ctl(ctl), .y(y4));

  function automatic word_t rnd(int kind);
    case (kind)
      0: return word_t'($urandom_range(0, 255)) - 128;
      1: return word_t'($urandom());
      default: return ($urandom_range(0, 1) == 1) ? word_t'(32'h7fff_ffff) : word_t'(32'h8000_0000);
    endcase
  endfunction

  initial begin
    word_t esum, emax, esum4, emax4;
    for (int n = 0; n < 3000; n++) begin
      int kind;
      kind = $urandom_range(0, 2);
      for (int l = 0; l < 8; l++) x[l] = ($urandom_range(0, 3) == 0) ? rnd(2) : rnd(kind);
      for (int l = 0; l < 4; l++) x4[l] = x[l+4];
      mold = rnd(kind);
      ctl.max = $urandom_range(0, 1) == 1;
      ctl.with_mold = $urandom_range(0, 1) == 1;
      #1;
      esum = '0; emax = x[0];
      for (int l = 0; l < 8; l++) begin esum += x[l]; if (x[l] > emax) emax = x[l]; end
      esum4 = '0; emax4 = x4[0];
      for (int l = 0; l < 4; l++) begin esum4 += x4[l]; if (x4[l] > emax4) emax4 = x4[l]; end
      if (ctl.max && ctl.with_mold) begin
        if (mold > emax) emax = mold;
        if (mold > emax4) emax4 = mold;
      end
      checks += 2;
      if (y != (ctl.max ? emax : esum)) begin
        failures++; $display("FAIL L=8 max=%0b wm=%0b y=%0d exp=%0d", ctl.max, ctl.with_mold, y, ctl.max ? emax : esum);
      end
      if (y4 != (ctl.max ? emax4 : esum4)) begin
        failures++; $display("FAIL L=4 y=%0d", y4);
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
