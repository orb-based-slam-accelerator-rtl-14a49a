// fast_corner: FAST-9 corner test and corner score on a 7x7 pixel window
// (paper Sec. 3.4 and 4.3, Fig. 3).
//
// Stage 1 compares the 16 pixels of the radius-3 Bresenham circle with the
// centre p and the threshold, giving a 16-bit "brighter" vector
// (I > p + TH) and a 16-bit "darker" vector (I < p - TH), and computes the
// score, the sum of |I - p| over the circle. Stage 2 ANDs both vectors with
// the sixteen masks of 9 contiguous circle positions and tests for equality
// with the mask; a match in either vector makes p a corner. The output is the
// score for a corner and 0 otherwise. Both stages advance only when en is
// high (the pixel stream's step enable), and a tag with the window centre's
// coordinate travels alongside: score_out/tag_out lag the window by two
// enabled steps. The threshold value is not given in the paper; 20 is the
// initial FAST threshold of ORB-SLAM.
//
// Window layout: win[r][c], r = 6 is the newest (lowest) row, c = 6 the
// newest (rightmost) column; the centre is win[3][3].
module fast_corner
  import orb_pkg::*;
#(
  parameter int unsigned TH = 20
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic [6:0][6:0][7:0]   win,
  input  tag_t                   tag_in,
  output logic [11:0]            score_out,
  output tag_t                   tag_out
);
  // Circle offsets (dx, dy), clockwise starting above the centre.
  localparam int CDX [16] = '{0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3, -3, -3, -2, -1};
  localparam int CDY [16] = '{-3, -3, -2, -1, 0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3};

  logic [15:0] bright, dark, bright_q, dark_q;
  logic [11:0] sad, sad_q;
  tag_t        tag_q;

  always_comb begin
    int p, v;
    p   = int'(win[3][3]);
    sad = '0;
    for (int i = 0; i < 16; i++) begin
      v = int'(win[3 + CDY[i]][3 + CDX[i]]);
      bright[i] = v > p + int'(TH);
      dark[i]   = v < p - int'(TH);
      sad       = sad + 12'((v > p) ? v - p : p - v);
    end
  end

  function automatic logic arc9(logic [15:0] v);
    logic hit;
    logic [31:0] vv;
    hit = 1'b0;
    vv  = {v, v};
    for (int s = 0; s < 16; s++) begin
      if (vv[s +: 9] == 9'h1FF) hit = 1'b1;
    end
    return hit;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bright_q <= '0; dark_q <= '0; sad_q <= '0; tag_q <= '0;
      score_out <= '0; tag_out <= '0;
    end else if (en) begin
      bright_q  <= bright;
      dark_q    <= dark;
      sad_q     <= sad;
      tag_q     <= tag_in;
      score_out <= (arc9(bright_q) || arc9(dark_q)) ? sad_q : 12'd0;
      tag_out   <= tag_q;
    end
  end

endmodule
