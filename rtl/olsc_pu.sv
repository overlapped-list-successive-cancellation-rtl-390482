// olsc_pu: one processing unit (PU) of the tree SC decoder.
//
// Combinational. With is_g = 0 it returns the min-sum f update of the LLR pair
// (a, b); with is_g = 1 it returns the g update b + (1 - 2 ps) a, saturated to
// the symmetric LLR range. `a` is the upper-half LLR of the parent node, `b` the
// lower-half one and `ps` the partial sum of the already decoded left child.
// The paper names the PU only; the f/g arithmetic is the standard one of SC
// decoding, and the min-sum approximation and widths are this design's choice.
module olsc_pu
  import olsc_pkg::*;
(
  input  llr_t a,
  input  llr_t b,
  input  logic ps,
  input  logic is_g,
  output llr_t y
);
  always_comb y = is_g ? g_fn(a, b, ps) : f_fn(a, b);
endmodule
