// vq_blackout: blackout detection. A frame is reported as blacked out (1)
// when it is of one uniform colour, and 0 otherwise.
//
// How it works. Instead of comparing every pixel of the frame, the test reuses
// two results of the exposure unit: the largest and the smallest 8x8 block sum
// of the frame. If their difference is greater than thBlout the frame is not
// uniform; otherwise blackout is 1. This is one subtractor and one comparator,
// as in the paper's listing; thBlout is 4 as the paper sets it.
// The paper's equation reports 0 when the difference is "greater or equal"
// to thBlout while its hardware listing uses "greater than"; this design
// follows the listing.
//
// Timing: purely combinational; blackout is valid whenever max1 and min1 are.
module vq_blackout
  import vq_pkg::*;
#(
  parameter int unsigned TH = TH_BLOUT
) (
  input  block_sum_t max1,
  input  block_sum_t min1,
  output logic       blackout
);
  block_sum_t diff;

  assign diff     = max1 - min1;
  assign blackout = !(diff > block_sum_t'(TH));

endmodule
