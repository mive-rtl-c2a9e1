// mive_vecsum -- vector-wide reduction unit of MIVE (sum or maximum).
//
// A binary tree of L-1 two-input nodes reduces the L lanes of X to one scalar.
// Every node is one adder whose right-hand operand is conditionally
// complemented, so it computes either a + b or a - b:
//   * sum mode  (ctl.max = 0): the node passes a + b;
//   * max mode  (ctl.max = 1): the node computes a - b and its sign selects
//     a or b, so the same tree finds the maximum.
// In max mode one extra node of the same kind can take M_old as a further
// candidate (ctl.with_mold), which gives max(X, M_old) of the Softmax loop.
// The mean of a sub-vector is the sum read with log2(L) fractional bits (L is
// a power of two), so "mean" and "vector_sum" use the same sum mode.
// The difference is formed one bit wider than DW so the sign is always right;
// sums wrap modulo 2^DW.  Purely combinational: the result is written to
// M_new or S_new at the end of the instruction's cycle.
// Follows the paper: binary tree, add/subtract nodes, max by subtraction,
// inputs X and M_old.  This design's choices: combinational, DW-bit nodes.
module mive_vecsum
  import mive_pkg::*;
#(
  parameter int unsigned L = 8
) (
  input  word_t   x [L],
  input  word_t   mold,
  input  vs_ctl_t ctl,
  output word_t   y
);

  // Tree stored heap-wise: node n has children 2n+1 and 2n+2, leaves L-1..2L-2.
  word_t node [2*L-1];
  word_t root;

  function automatic word_t combine(input word_t a, input word_t b, input logic is_max);
    logic signed [DW:0] r;
    r = is_max ? ({a[DW-1], a} + ~{b[DW-1], b} + (DW+1)'(1)) : ({a[DW-1], a} + {b[DW-1], b});
    if (is_max) return r[DW] ? b : a;
    else        return word_t'(r[DW-1:0]);
  endfunction

  always_comb begin
    for (int n = 0; n < int'(L); n++)
      node[L-1+n] = x[n];
    for (int n = int'(L) - 2; n >= 0; n--)
      node[n] = combine(node[2*n+1], node[2*n+2], ctl.max);
    root = node[0];
    y = (ctl.max && ctl.with_mold) ? combine(root, mold, 1'b1) : root;
  end

  initial assert (L >= 2 && (L & (L - 1)) == 0) else $error("L must be a power of two");

endmodule
