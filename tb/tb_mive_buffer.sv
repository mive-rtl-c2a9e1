// tb_mive_buffer -- self-checking test of the on-chip buffer (circular queue).
//
// Uses ROWS = 16 so that the pointers wrap many times.  Random pop/push
// traffic (never popping when empty nor pushing when full) with rows from
// outside or from X; pushed X rows must be saturated to [-128, 127] per
// element.  A reference queue is kept here; the head row, count, empty and
// full are compared every cycle.  The test fills the queue completely once.
`timescale 1ns/1ps
module tb_mive_buffer;
  import mive_pkg::*;

  localparam int L = 8;
  localparam int ROWS = 16;
  int checks = 0, failures = 0;
  int fills = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, pop, push, push_ext, empty, full;
  word_t x [L];
  elem_t ext_row [L], head [L];
  logic [$clog2(ROWS+1)-1:0] count;

  mive_buffer #(.L(L), .ROWS(ROWS)) dut (.clk, .rst_n, .pop, .push, .push_ext, .x, .ext_row, .head, .count, .empty, .full);

  typedef elem_t row_t [L];
  row_t q [$];

  function automatic elem_t sat(word_t w);
    if (w > 127) return 8'sd127;
    if (w < -128) return -8'sd128;
    return elem_t'(w);
  endfunction

  initial begin
    row_t nr;
    rst_n = 0; pop = 0; push = 0; push_ext = 0;
    for (int l = 0; l < L; l++) begin x[l] = '0; ext_row[l] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      checks++;
      if (count != q.size() || empty != (q.size() == 0) || full != (q.size() == ROWS)) begin
        failures++; $display("FAIL count=%0d exp=%0d", count, q.size());
      end
      if (q.size() > 0) begin
        for (int l = 0; l < L; l++) begin
          checks++;
          if (head[l] != q[0][l]) begin failures++; $display("FAIL head lane %0d %0d exp %0d", l, head[l], q[0][l]); end
        end
      end
      if (q.size() == ROWS) fills++;
      // bias towards filling in the first half, draining in the second
      pop  = q.size() > 0 && ($urandom_range(0, 99) < ((n % 800) < 400 ? 30 : 70));
      push = (q.size() < ROWS || pop) && ($urandom_range(0, 99) < ((n % 800) < 400 ? 70 : 30));
      push_ext = $urandom_range(0, 1) == 1;
      for (int l = 0; l < L; l++) begin
        ext_row[l] = elem_t'($urandom());
        x[l] = $urandom_range(0, 1) ? word_t'($urandom_range(0, 400)) - 200 : word_t'($urandom());
        nr[l] = push_ext ? ext_row[l] : sat(x[l]);
      end
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(nr);
    end
    checks++;
    if (fills == 0) begin failures++; $display("FAIL buffer never filled"); end
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
