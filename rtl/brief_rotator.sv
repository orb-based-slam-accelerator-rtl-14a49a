// brief_rotator: rotates one BRIEF point pair per cycle by the keypoint's
// angle (paper Eq. 2 and Sec. 4.6).
//
//   x' = round((cos * x - sin * y) / 256)
//   y' = round((sin * x + cos * y) / 256)
// for both points of the pair, with cos/sin in signed 8-bit-magnitude fixed
// point (value/256) from the dispatcher. Rounding is half up (add 128,
// arithmetic shift by 8). Results are clamped to -R..R (R = 18 for the
// 37x37 window); the paper bounds the rotated 27x27 pattern to a 37x37
// patch, and the clamp only guards against the fixed-point rounding. One
// register stage: in_valid/idx_in in one cycle give out_valid/idx_out and
// the rotated pair in the next.
module brief_rotator
  import orb_pkg::*;
#(
  parameter int unsigned R  = 18,
  parameter int unsigned IW = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [IW-1:0]       idx_in,
  input  ppair_t              pair_in,
  input  logic signed [8:0]   cos_i,
  input  logic signed [8:0]   sin_i,
  output logic                out_valid,
  output logic [IW-1:0]       idx_out,
  output ppair_t              pair_out
);
  function automatic pcoord_t rot(int a, int b, int c, int s, logic is_y);
    int v;
    v = is_y ? (s * a + c * b) : (c * a - s * b);
    v = (v + 128) >>> 8;
    if (v >  int'(R)) v =  int'(R);
    if (v < -int'(R)) v = -int'(R);
    return pcoord_t'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      idx_out   <= '0;
      pair_out  <= '0;
    end else begin
      out_valid <= in_valid;
      idx_out   <= idx_in;
      pair_out[3] <= rot(int'(pair_in[3]), int'(pair_in[2]), int'(cos_i), int'(sin_i), 1'b0);
      pair_out[2] <= rot(int'(pair_in[3]), int'(pair_in[2]), int'(cos_i), int'(sin_i), 1'b1);
      pair_out[1] <= rot(int'(pair_in[1]), int'(pair_in[0]), int'(cos_i), int'(sin_i), 1'b0);
      pair_out[0] <= rot(int'(pair_in[1]), int'(pair_in[0]), int'(cos_i), int'(sin_i), 1'b1);
    end
  end
endmodule
