// mive_buffer -- MIVE's on-chip buffer: ROWS rows of L INT8 elements, used as
// a circular queue.
//
// The algorithms walk the input vector in ceil(N/L) sub-vectors with "pop X_i"
// and "push X": a pop takes the row at the head, a push appends a row at the
// tail.  Pushing every popped row back keeps the vector in order for the next
// pass; the second pass pushes the normalised rows, which then leave the
// buffer for external memory by further pops.  The head row is always visible
// on head (first-word fall-through); pop only advances the head pointer.
// A push stores either the X register, saturated element by element to INT8
// (outputs keep the input format), or a row from outside (push_ext = 1).
// Pop and push may happen in the same cycle; the count then stays the same.
// The paper gives the buffer's shape (L wide, N/L deep) and pop/push; the
// queue organisation, saturation and the ROWS default (enough for N = 7168 at
// L = 8) are this design's.
module mive_buffer
  import mive_pkg::*;
#(
  parameter int unsigned L    = 8,
  parameter int unsigned ROWS = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     pop,
  input  logic                     push,
  input  logic                     push_ext,
  input  word_t                    x      [L],
  input  elem_t                    ext_row[L],
  output elem_t                    head   [L],
  output logic [$clog2(ROWS+1)-1:0] count,
  output logic                     empty,
  output logic                     full
);

  localparam int unsigned AW = $clog2(ROWS);

  logic [L*EW-1:0] mem [ROWS];
  logic [AW-1:0]   rd_ptr, wr_ptr;
  logic [L*EW-1:0] wr_row, rd_row;

  always_comb begin
    for (int l = 0; l < int'(L); l++)
      wr_row[l*EW +: EW] = push_ext ? ext_row[l] : sat_elem(x[l]);
  end

  assign rd_row = mem[rd_ptr];
  always_comb begin
    for (int l = 0; l < int'(L); l++)
      head[l] = elem_t'(rd_row[l*EW +: EW]);
  end

  assign empty = (count == '0);
  assign full  = (count == ($clog2(ROWS+1))'(ROWS));

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(ROWS - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= wr_row;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (pop)  rd_ptr <= inc(rd_ptr);
      if (push) wr_ptr <= inc(wr_ptr);
      count <= count + ($clog2(ROWS+1))'(push) - ($clog2(ROWS+1))'(pop);
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> (!empty))
    else $error("pop from an empty buffer");
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push && !pop |-> !full)
    else $error("push into a full buffer");

endmodule
