// fast_detector: the FAST keypoint path of one pyramid level (paper
// Fig. 11): 7-row line buffer, 7x7 window, corner detection, 3-row line
// buffer of corner scores, 3x3 window and non-maximum suppression.
//
// All stages advance on en, one step per pixel of the level's raster
// stream; a coordinate tag for each pixel enters with it and is turned into
// the coordinate of each window's centre, so the keypoint leaves with its
// own (x, y). Keypoints come out in raster order as one-cycle kp_valid
// pulses, about four rows after the pixel itself entered, and go to the
// level's keypoint FIFO.
module fast_detector
  import orb_pkg::*;
#(
  parameter int unsigned W    = 640,
  parameter int unsigned H    = 480,
  parameter int unsigned TH   = 20,
  parameter int unsigned EDGE = 21
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic [7:0] pix,
  input  tag_t       tag_in,
  output logic       kp_valid,
  output kp_t        kp
);
  logic [6:0][7:0]       col7;
  logic [6:0][6:0][7:0]  win7;
  tag_t                  tag7, tag_s, tag3;
  logic [11:0]           score;
  logic [2:0][11:0]      col3;
  logic [2:0][2:0][11:0] win3;

  line_buffer #(.ROWS(7), .W(W), .DW(8)) u_lb7 (
    .clk, .rst_n, .en, .pix_in(pix), .col_out(col7)
  );
  window_buffer #(.ROWS(7), .COLS(7), .DW(8)) u_win7 (
    .clk, .rst_n, .en, .col_in(col7), .win(win7)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  tag7 <= '0;
    else if (en) tag7 <= center_of(tag_in, 3, 3, W);
  end

  fast_corner #(.TH(TH)) u_corner (
    .clk, .rst_n, .en, .win(win7), .tag_in(tag7), .score_out(score), .tag_out(tag_s)
  );

  line_buffer #(.ROWS(3), .W(W), .DW(12)) u_lb3 (
    .clk, .rst_n, .en, .pix_in(score), .col_out(col3)
  );
  window_buffer #(.ROWS(3), .COLS(3), .DW(12)) u_win3 (
    .clk, .rst_n, .en, .col_in(col3), .win(win3)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  tag3 <= '0;
    else if (en) tag3 <= center_of(tag_s, 1, 1, W);
  end

  nms #(.W(W), .H(H), .EDGE(EDGE)) u_nms (
    .clk, .rst_n, .en, .win(win3), .tag_in(tag3), .kp_valid, .kp
  );
endmodule
