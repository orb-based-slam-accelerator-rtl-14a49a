// orientation: keypoint orientation from the intensity centroid of a 37x37
// window, discretised into 4*SPQ sectors (paper Sec. 4.5, Fig. 15,
// Table 2, Fig. 13-14).
//
// Input is one 37-pixel column per enabled step from the 37-row line buffer
// of smoothed pixels (col_in[36] is the newest row). The moments are kept
// recursively, as in the paper, instead of summing a stored 37x37 window:
//   stage A  column sum adder   S(Cin) = sum of the column
//            Y moment adder     m01(Cin) = sum of (r-18) * pixel
//   delay    both values are delayed 37 steps to give S(Cout), m01(Cout)
//   stage B  m00 += S(Cin) - S(Cout)
//            m01 += m01(Cin) - m01(Cout)
//            m10 += -18 S(Cin) - 19 S(Cout) + m00(old)
// The paper's x axis puts the incoming column at x = -18 and the outgoing
// one at x = +18, so m10 here is the negative of the moment in image
// coordinates (x growing to the right); stage C accounts for that.
//   stage C  quadrant compute: signs of the image-axis moments, absolute
//            values |mx|, |my|
//   stage D  constant tan multipliers and comparators: c_k = |mx| * tan_k
//            > |my| for the centre line of each sector k of the quadrant
//            (tan_k in Q.8, see orb_pkg); a priority encoder picks the
//            first k with c_k set, i.e. the angle is rounded up to the next
//            sector line; an angle past the last line stays in the last
//            sector (this design's choice, it is also the nearest line).
// Outputs: quadrant = {image x moment negative, y moment negative}, the
// sector within the quadrant, and the tag of the window centre. out_valid
// is a one-cycle pulse after each enabled step whose centre tag is valid;
// outputs lag the input column by four enabled steps.
module orientation
  import orb_pkg::*;
#(
  parameter int unsigned W   = 640,
  parameter int unsigned DW  = 6,
  parameter int unsigned SPQ = 16      // sectors per quadrant: 4, 8 or 16 (default 64 in total)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic [36:0][DW-1:0]     col_in,
  input  tag_t                    tag_in,   // coordinate of col_in[36]
  output logic                    out_valid,
  output tag_t                    tag_out,  // window centre
  output logic [1:0]              quadrant,
  output logic [$clog2(SPQ)-1:0]  sector
);
  localparam int unsigned SW = DW + 6;    // column sum, up to 37*(2^DW-1)
  localparam int unsigned YMW = DW + 10;  // column y-moment, |.| <= 342*(2^DW-1)
  localparam int unsigned MW = DW + 18;   // window moments
  localparam int unsigned CW = MW + 14;   // products with tan constants

  // Stage A
  logic [SW-1:0]          s_in, s_a;
  logic signed [YMW-1:0]  y_in, y_a;
  tag_t                   tag_a;
  // Delay buffers
  logic [SW-1:0]          s_dl [37];
  logic signed [YMW-1:0]  y_dl [37];
  // Stage B
  logic signed [MW-1:0]   m00, m01, m10;
  tag_t                   tag_b;
  // Stage C
  logic [MW-1:0]          ax, ay;
  logic [1:0]             quad_c;
  tag_t                   tag_c;
  // Stage D
  logic [SPQ-1:0]         cmp;
  logic [$clog2(SPQ)-1:0] sec_d;

  always_comb begin
    s_in = '0;
    y_in = '0;
    for (int r = 0; r < 37; r++) begin
      s_in = s_in + SW'(col_in[r]);
      y_in = y_in + YMW'((r - 18) * int'(col_in[r]));
    end
  end

  always_comb begin
    for (int k = 0; k < SPQ; k++)
      cmp[k] = (CW'(ax) * CW'(tan_q(k, SPQ))) > (CW'(ay) << 8);
    sec_d = $clog2(SPQ)'(SPQ - 1);
    for (int k = SPQ - 1; k >= 0; k--)
      if (cmp[k]) sec_d = $clog2(SPQ)'(k);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_a <= '0; y_a <= '0; tag_a <= '0;
      for (int i = 0; i < 37; i++) begin s_dl[i] <= '0; y_dl[i] <= '0; end
      m00 <= '0; m01 <= '0; m10 <= '0; tag_b <= '0;
      ax <= '0; ay <= '0; quad_c <= '0; tag_c <= '0;
      quadrant <= '0; sector <= '0; tag_out <= '0; out_valid <= 1'b0;
    end else begin
      out_valid <= en && tag_c.valid;
      if (en) begin
        // A: column adders
        s_a   <= s_in;
        y_a   <= y_in;
        tag_a <= tag_in;
        // delay buffers: s_dl[k] holds the stage-A value k+1 steps old
        s_dl[0] <= s_a;
        y_dl[0] <= y_a;
        for (int i = 1; i < 37; i++) begin
          s_dl[i] <= s_dl[i-1];
          y_dl[i] <= y_dl[i-1];
        end
        // B: recursive moments
        m00   <= m00 + MW'(s_a) - MW'(s_dl[36]);
        m01   <= m01 + MW'(y_a) - MW'(y_dl[36]);
        m10   <= m10 - MW'(18) * MW'(s_a) - MW'(19) * MW'(s_dl[36]) + m00;
        tag_b <= center_of(tag_a, 18, 18, W);
        // C: quadrant; image x moment is -m10
        quad_c <= {m10 > 0, m01 < 0};
        ax     <= (m10 < 0) ? MW'(-m10) : MW'(m10);
        ay     <= (m01 < 0) ? MW'(-m01) : MW'(m01);
        tag_c  <= tag_b;
        // D: tan multipliers, comparators, priority encoder
        quadrant <= quad_c;
        sector   <= sec_d;
        tag_out  <= tag_c;
      end
    end
  end
endmodule
