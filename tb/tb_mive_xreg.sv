// tb_mive_xreg -- self-checking test of the vector register X.
//
// Random cycles load X either from the muladd-array result or from a buffer
// row (INT8 elements, which must arrive sign-extended to 32 bits), or hold it
// (we = 0 or en = 0).  A reference copy is kept here and compared after every
// rising edge; reset must clear all lanes.
`timescale 1ns/1ps
module tb_mive_xreg;
  import mive_pkg::*;

  localparam int L = 8;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, en, we, from_buf;
  word_t mul_y [L], x [L], rx [L];
  elem_t buf_row [L];

  mive_xreg #(.L(L)) dut (.clk, .rst_n, .en, .we, .from_buf, .mul_y, .buf_row, .x);

  initial begin
    rst_n = 0; en = 0; we = 0; from_buf = 0;
    for (int l = 0; l < L; l++) begin mul_y[l] = '0; buf_row[l] = '0; rx[l] = '0; end
    repeat (2) @(posedge clk);
    @(negedge clk);
    for (int l = 0; l < L; l++) begin checks++; if (x[l] != 0) begin failures++; $display("FAIL reset"); end end
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      en = $urandom_range(0, 7) != 0; we = $urandom_range(0, 3) != 0; from_buf = $urandom_range(0, 1) == 1;
      for (int l = 0; l < L; l++) begin
        mul_y[l] = word_t'($urandom());
        buf_row[l] = elem_t'($urandom());
      end
      @(posedge clk);
      if (en && we)
        for (int l = 0; l < L; l++) rx[l] = from_buf ? word_t'(int'(buf_row[l])) : mul_y[l];
      #1;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (x[l] != rx[l]) begin failures++; $display("FAIL lane %0d x=%0d exp=%0d", l, x[l], rx[l]); end
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
