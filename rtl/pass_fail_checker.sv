// pass_fail_checker: in-die comparator used for distance filtering.
//
// NAND dies compare the fail-bit count against a reference to decide whether
// a program pulse passed.  The design loads the distance-filtering threshold
// as that reference: an embedding passes (and is worth sending to the
// controller) when its distance is strictly below the threshold.  Purely
// combinational.  "Below" follows the design's wording; the strictness of
// the comparison is this implementation's reading of it.
module pass_fail_checker
  import reis_pkg::*;
(
  input  dist_t hdist,
  input  dist_t thr,
  output logic  pass
);
  always_comb pass = (hdist < thr);
endmodule
