// keypoint_matcher: pairs the orientation module's output with the head of
// the keypoint FIFO (paper Sec. 4.6, Fig. 16).
//
// FAST finds a keypoint many rows before the orientation window is centred
// on it, so keypoints wait in the FIFO. Each orientation result carries the
// coordinate of its window centre; when it equals the FIFO head (same frame
// parity, x and y) the matcher raises match and pops the head. A head that
// the orientation stream has already passed in raster order can never match
// again and is popped as stale; the paper does not say what happens to
// such an entry, this rule is this design's. Purely combinational: match,
// stale and pop are valid in the cycle of the orientation pulse.
module keypoint_matcher
  import orb_pkg::*;
(
  input  logic  o_valid,
  input  tag_t  o_tag,
  input  logic  fifo_empty,
  input  kp_t   fifo_head,
  output logic  match,
  output logic  stale,
  output logic  pop
);
  logic same_frame, equal, behind;

  always_comb begin
    same_frame = !fifo_empty && o_valid && o_tag.valid && (fifo_head.frame == o_tag.frame);
    equal      = (fifo_head.x == o_tag.x) && (fifo_head.y == o_tag.y);
    behind     = (fifo_head.y < o_tag.y) || ((fifo_head.y == o_tag.y) && (fifo_head.x < o_tag.x));
    match      = same_frame && equal;
    stale      = same_frame && behind;
    pop        = match || stale;
  end
endmodule
