// mive_xreg -- MIVE's local vector register X (L lanes of DW bits).
//
// X feeds the vector muladd array and vecsum and stores the array's results,
// so consecutive element-wise operations on one sub-vector never touch the
// buffer.  Its input multiplexer selects either the array result (x_from_buf
// = 0) or the row at the head of the on-chip buffer (x_from_buf = 1), whose
// INT8 elements are sign-extended to DW bits.  Written at the rising clock edge
// when en and we are set; reset to zero (this design's choice).
module mive_xreg
  import mive_pkg::*;
#(
  parameter int unsigned L = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  we,
  input  logic  from_buf,
  input  word_t mul_y   [L],
  input  elem_t buf_row [L],
  output word_t x       [L]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < int'(L); l++) x[l] <= '0;
    end else if (en && we) begin
      for (int l = 0; l < int'(L); l++)
        x[l] <= from_buf ? word_t'(buf_row[l]) : mul_y[l];
    end
  end

endmodule
