// nms: 3x3 non-maximum suppression of FAST corner scores (paper Sec. 4.3).
//
// The centre score s = win[1][1] becomes a keypoint when it is non-zero and
// greater than the neighbours in the row above and the one to its left, and
// greater than or equal to the neighbour to its right and the three in the
// row below (the paper's rule that avoids suppressing both of two adjacent
// corners with equal scores). Keypoints closer than EDGE pixels to any
// image border are discarded so that every later window (7x7 Gaussian
// feeding the 37x37 orientation and BRIEF windows) lies in_bounds the image;
// the border rule is this design's choice. kp_valid is a one-cycle pulse
// in the cycle after the enabled step that presented the window; kp holds
// the centre coordinate and score.
//
// Window layout: win[r][c], r = 2 the lower row, c = 2 the right column.
module nms
  import orb_pkg::*;
#(
  parameter int unsigned W    = 640,
  parameter int unsigned H    = 480,
  parameter int unsigned EDGE = 21
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic [2:0][2:0][11:0]   win,
  input  tag_t                    tag_in,   // coordinate of the window centre
  output logic                    kp_valid,
  output kp_t                     kp
);
  logic s_max, in_bounds;

  always_comb begin
    logic [11:0] s;
    s = win[1][1];
    s_max = (s != 0)
         && (s >  win[0][0]) && (s >  win[0][1]) && (s >  win[0][2])
         && (s >  win[1][0]) && (s >= win[1][2])
         && (s >= win[2][0]) && (s >= win[2][1]) && (s >= win[2][2]);
    in_bounds = (int'(tag_in.x) >= int'(EDGE)) && (int'(tag_in.x) < int'(W) - int'(EDGE))
          && (int'(tag_in.y) >= int'(EDGE)) && (int'(tag_in.y) < int'(H) - int'(EDGE));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kp_valid <= 1'b0;
      kp       <= '0;
    end else begin
      kp_valid <= en && tag_in.valid && s_max && in_bounds;
      if (en) begin
        kp.frame <= tag_in.frame;
        kp.x     <= tag_in.x;
        kp.y     <= tag_in.y;
        kp.score <= win[1][1];
      end
    end
  end
endmodule
