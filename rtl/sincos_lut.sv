// sincos_lut: cosine and sine of a discretised keypoint angle for the BRIEF
// rotator (paper Sec. 4.6).
//
// Only the magnitudes for the SPQ sector lines of one quadrant are stored,
// as 8-bit fixed point (value/256, saturated at 255/256); the quadrant bits
// {x negative, y negative} from the orientation module set the signs, as
// the paper describes. Purely combinational; a single table per level feeds
// all BRIEF modules through the dispatcher.
module sincos_lut
  import orb_pkg::*;
#(
  parameter int unsigned SPQ = 16   // sectors per quadrant: 4, 8 or 16
) (
  input  logic [1:0]               quadrant,
  input  logic [$clog2(SPQ)-1:0]   sector,
  output logic signed [8:0]        cos_o,
  output logic signed [8:0]        sin_o
);
  logic [7:0] cmag, smag;

  always_comb begin
    cmag = '0;
    smag = '0;
    for (int k = 0; k < SPQ; k++) begin
      if (int'(sector) == k) begin
        cmag = 8'(cos_q(k, SPQ));
        smag = 8'(sin_q(k, SPQ));
      end
    end
    cos_o = quadrant[1] ? -$signed({1'b0, cmag}) : $signed({1'b0, cmag});
    sin_o = quadrant[0] ? -$signed({1'b0, smag}) : $signed({1'b0, smag});
  end
endmodule
