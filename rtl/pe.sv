// pe: processing element of the processing module.
//
// Computes, for one pair of neighbouring LLRs (a, b) of a node, either the
// f function (LLR of the left child: sign product, smaller magnitude) or the
// g function (LLR of the right child: (-1)^beta * a + b, saturated), both in
// sign-and-magnitude arithmetic. sel_g chooses the output according to the
// current decoding step. Combinational.
//
// Origin: one PE computing f and g in sign and magnitude, output chosen by
// the decoding stage, is the published design; saturation and the positive
// sign of zero are this design's own.
module pe
  import srfsc_pkg::*;
(
  input  llr_t a,
  input  llr_t b,
  input  logic beta,
  input  logic sel_g,
  output llr_t y
);

  assign y = sel_g ? g_fn(a, b, beta) : f_fn(a, b);

endmodule
