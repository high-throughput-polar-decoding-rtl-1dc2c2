// pe_array: one array of processing elements (PEs) of D_s for the stages above
// the multi-bit sub-codes.
//
// Each PE takes the LLR pair (a_j, b_j) of a scheduling-tree node and produces,
// in the same cycle, the F-function output of the left child and both
// G-function outputs of the right child, one for partial sum 0 and one for
// partial sum 1 (G-node look-ahead).  The right choice is made later, when the
// partial sums of the left sub-tree are known, so a pair of sibling nodes
// costs one cycle.  Purely combinational; lanes above the active node length
// are don't-care for the caller.  The decoder owns one array of NPE = N/4 PEs
// per path; the two arrays together serve the N/2 operations of stage n-1.
module pe_array
  import ta_scl_pkg::*;
#(
  parameter int NPE = 256
) (
  input  llr_t a  [NPE],
  input  llr_t b  [NPE],
  output llr_t f  [NPE],
  output llr_t g0 [NPE],
  output llr_t g1 [NPE]
);
  always_comb begin
    for (int j = 0; j < NPE; j++) begin
      f[j]  = f_func(a[j], b[j]);
      g0[j] = g_func(a[j], b[j], 1'b0);
      g1[j] = g_func(a[j], b[j], 1'b1);
    end
  end
endmodule
