// orb_pkg: types, constants and constant tables shared by the ORB feature
// extraction pipeline.
//
// Pixel stream coordinates travel through every pipeline as a tag
// (tag_t): column, row, a frame-parity bit and a valid bit. A stage that
// looks at a window reports the coordinate of the window centre, obtained
// with center_of(), which steps back along the raster order of the image.
//
// Constant tables:
//  * tan_q()   - tan of the sector centre lines in unsigned Q.8. For 4
//                sectors per quadrant (16 sectors in total) the values are
//                the shift-add constants printed in the paper's Table 2
//                (0.1875, 0.65625, 1.5, 5); for 16 sectors per quadrant
//                (64 sectors, the configuration the paper selects) they are
//                round(256 * tan((k + 0.5) * 90/16 degrees)).
//  * cos_q(), sin_q() - magnitudes of cos/sin of the same sector lines,
//                round(256 * f((k + 0.5) * 90/S degrees)) saturated to 255
//                (8-bit fixed point, as the paper states).
//  * brief_pattern() - the 256 BRIEF point pairs. The paper uses the ORB-SLAM
//                pattern limited to a 27x27 patch but does not print it; this
//                design generates a fixed pseudo-random pattern inside the
//                same 27x27 patch (coordinates -13..13) from a 32-bit
//                xorshift sequence with seed 32'h2545F491: each coordinate is
//                (r mod 27) - 13 for the next value r of the sequence.
package orb_pkg;

  localparam int unsigned XW = 10;   // column width (images up to 1024 wide)
  localparam int unsigned YW = 10;   // row width

  typedef struct packed {
    logic          valid;
    logic          frame;            // frame parity, toggles every frame
    logic [YW-1:0] y;
    logic [XW-1:0] x;
  } tag_t;

  localparam int unsigned TAG_W = $bits(tag_t);

  // Keypoint from FAST/NMS, stored in the keypoint FIFO.
  typedef struct packed {
    logic          frame;
    logic [YW-1:0] y;
    logic [XW-1:0] x;
    logic [11:0]   score;
  } kp_t;

  // Descriptor record sent to the CPU (320 bits).
  typedef struct packed {
    logic [255:0]  desc;
    logic [21:0]   rsvd;             // pads the record to 320 bits
    logic [1:0]    level;
    logic [1:0]    quadrant;         // {x negative, y negative}
    logic [5:0]    sector;           // sector within the quadrant
    logic [11:0]   score;
    logic [YW-1:0] y;
    logic [XW-1:0] x;
  } desc_rec_t;

  localparam int unsigned DESC_REC_W = $bits(desc_rec_t);

  // Feature-matcher result: query position and level, index of the nearest
  // reference descriptor and its Hamming distance.
  typedef struct packed {
    logic [YW-1:0] y;
    logic [XW-1:0] x;
    logic [1:0]    level;
    logic [7:0]    ref_idx;
    logic [8:0]    hdist;
  } match_rec_t;

  // Step a tag back by dx columns and dy rows in raster order for an image
  // of width w. Rows before the first row of the frame are marked invalid.
  function automatic tag_t center_of(tag_t t, int dx, int dy, int w);
    tag_t r;
    int   xx, yy;
    xx = int'(t.x) - dx;
    yy = int'(t.y) - dy;
    if (xx < 0) begin
      xx += w;
      yy -= 1;
    end
    r.frame = t.frame;
    r.valid = t.valid && (yy >= 0);
    r.x     = XW'(xx);
    r.y     = (yy >= 0) ? YW'(yy) : '0;
    return r;
  endfunction

  // Size of an image line after one 5/6 down-scaling step.
  function automatic int scaled_len(int n);
    return ((n - 1) / 6) * 5 + (((n - 1) % 6) > 5 ? 5 : ((n - 1) % 6));
  endfunction

  function automatic int level_len(int n, int level);
    int r;
    r = n;
    for (int i = 0; i < level; i++) r = scaled_len(r);
    return r;
  endfunction

  // tan(theta_k) in Q.8 for sector k of a quadrant split into spq sectors.
  function automatic int tan_q(int k, int spq);
    int t16[16];
    int t8[8];
    int t4[4];
    t16 = '{13, 38, 64, 92, 121, 153, 190, 232, 282, 345, 427, 541, 715, 1022, 1726, 5211};
    t8  = '{25, 78, 137, 210, 312, 479, 844, 2599};
    t4  = '{48, 168, 384, 1280};
    return (spq == 4) ? t4[k % 4] : (spq == 8) ? t8[k % 8] : t16[k % 16];
  endfunction

  function automatic int cos_q(int k, int spq);
    int c16[16];
    int c8[8];
    int c4[4];
    c16 = '{255, 253, 248, 241, 231, 220, 206, 190, 172, 152, 132, 109, 86, 62, 38, 13};
    c8  = '{255, 245, 226, 198, 162, 121, 74, 25};
    c4  = '{251, 213, 142, 50};
    return (spq == 4) ? c4[k % 4] : (spq == 8) ? c8[k % 8] : c16[k % 16];
  endfunction

  function automatic int sin_q(int k, int spq);
    return cos_q(spq - 1 - k, spq);
  endfunction

  // BRIEF pattern: entry i holds {ax, ay, bx, by}, each in -13..13.
  typedef logic signed [5:0] pcoord_t;
  typedef pcoord_t [3:0] ppair_t;   // [3]=ax [2]=ay [1]=bx [0]=by

  localparam int unsigned NPAIRS = 256;
  typedef ppair_t [NPAIRS-1:0] pattern_t;

  function automatic pattern_t brief_pattern();
    logic [31:0] s;
    pattern_t    p;
    s = 32'h2545F491;
    for (int n = 0; n < NPAIRS; n++) begin
      for (int c = 3; c >= 0; c--) begin
        s = s ^ (s << 13);
        s = s ^ (s >> 17);
        s = s ^ (s << 5);
        p[n][c] = pcoord_t'(int'(s % 27) - 13);
      end
    end
    return p;
  endfunction

endpackage
