// orb_level: the ORB extractor for one level of the image pyramid (paper
// Fig. 9, one of the stacked yellow blocks, with Fig. 11, 15 and 16).
//
// The level receives its pixel stream (at most one 8-bit pixel per cycle,
// raster order, W x H per frame) and produces oriented BRIEF descriptors:
//   * fast_detector on the 8-bit pixels finds keypoints, which wait in the
//     keypoint FIFO (depth KP_DEPTH, overflow drops the keypoint);
//   * the pixel is quantised to 6 bits (upper bits kept, paper Sec. 5.2)
//     and smoothed by gaussian_filter;
//   * a 37-row line buffer of smoothed pixels feeds the orientation module
//     and, delayed by ORIENT_LAT-1 steps, the windows of the BRIEF modules,
//     so that a BRIEF window is centred on the pixel whose orientation is
//     being reported;
//   * keypoint_matcher compares each orientation result with the FIFO head;
//     on a match, brief_arbiter starts a ready brief_unit with the angle's
//     cos/sin from sincos_lut, or drops the keypoint if all are busy.
// Every stage advances on the step enable en: a pixel, or, after the last
// pixel of a frame and while no new pixel arrives, one of FLUSH empty steps
// that push the last results out of the pipeline. A new pixel cancels the
// flush, since it drains the pipeline itself.
// Counters x, y and frame parity tag each pixel. Statistic pulses report
// keypoints found, dropped at the full FIFO, dropped by the arbiter and
// popped as stale, and flush steps.
module orb_level
  import orb_pkg::*;
#(
  parameter int unsigned W        = 640,
  parameter int unsigned H        = 480,
  parameter logic [1:0]  LEVEL    = 2'd0,
  parameter int unsigned NUNITS   = 4,
  parameter int unsigned KP_DEPTH = 128,
  parameter int unsigned FAST_TH  = 20,
  parameter int unsigned EDGE     = 21,
  parameter int unsigned SPQ      = 16,
  parameter int unsigned NP       = NPAIRS,
  parameter int unsigned FLUSH    = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    pix_valid,
  input  logic [7:0]              pix,
  output logic [NUNITS-1:0]       desc_valid,
  input  logic [NUNITS-1:0]       desc_ready,
  output desc_rec_t [NUNITS-1:0]  desc_out,
  output logic                    st_kp_found,
  output logic                    st_kp_overflow,
  output logic                    st_brief_drop,
  output logic                    st_kp_stale,
  output logic                    st_dispatch,
  output logic                    st_flush
);
  localparam int unsigned DW         = 6;
  localparam int unsigned ORIENT_LAT = 4;
  localparam int unsigned SB         = $clog2(SPQ);

  // ---- coordinate counters and flush ----
  logic [XW-1:0]          xc;
  logic [YW-1:0]          yc;
  logic                   frame;
  logic [$clog2(FLUSH+1)-1:0] flush_cnt;
  logic                   en;
  tag_t                   tag_in;

  assign st_flush = !pix_valid && (flush_cnt != 0);
  assign en       = pix_valid || st_flush;

  always_comb begin
    tag_in.valid = pix_valid;
    tag_in.frame = frame;
    tag_in.x     = xc;
    tag_in.y     = yc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xc <= '0; yc <= '0; frame <= 1'b0; flush_cnt <= '0;
    end else if (pix_valid) begin
      flush_cnt <= '0;
      if (xc == XW'(W - 1)) begin
        xc <= '0;
        if (yc == YW'(H - 1)) begin
          yc        <= '0;
          frame     <= !frame;
          flush_cnt <= ($clog2(FLUSH+1))'(FLUSH);
        end else yc <= yc + 1'b1;
      end else xc <= xc + 1'b1;
    end else if (flush_cnt != 0) begin
      flush_cnt <= flush_cnt - 1'b1;
    end
  end

  // ---- FAST path and keypoint FIFO ----
  logic kp_valid;
  kp_t  kp, kp_head;
  logic kp_empty, kp_full, kp_pop;
  logic [$clog2(KP_DEPTH+1)-1:0] kp_count;

  fast_detector #(.W(W), .H(H), .TH(FAST_TH), .EDGE(EDGE)) u_fast (
    .clk, .rst_n, .en, .pix, .tag_in, .kp_valid, .kp
  );

  sync_fifo #(.WIDTH($bits(kp_t)), .DEPTH(KP_DEPTH)) u_kp_fifo (
    .clk, .rst_n, .wr_en(kp_valid), .wr_data(kp), .rd_en(kp_pop),
    .rd_data(kp_head), .empty(kp_empty), .full(kp_full), .count(kp_count)
  );

  assign st_kp_found    = kp_valid;
  assign st_kp_overflow = kp_valid && kp_full;

  // ---- Gaussian, 37-row line buffer, orientation ----
  logic [DW-1:0]          g_pix;
  tag_t                   g_tag;
  logic [36:0][DW-1:0]    col37;

  gaussian_filter #(.W(W), .DW(DW)) u_gauss (
    .clk, .rst_n, .en, .pix(pix[7:8-DW]), .tag_in, .pix_out(g_pix), .tag_out(g_tag)
  );

  line_buffer #(.ROWS(37), .W(W), .DW(DW)) u_lb37 (
    .clk, .rst_n, .en, .pix_in(g_pix), .col_out(col37)
  );

  logic              o_valid;
  tag_t              o_tag;
  logic [1:0]        o_quad;
  logic [SB-1:0]     o_sector;

  orientation #(.W(W), .DW(DW), .SPQ(SPQ)) u_orient (
    .clk, .rst_n, .en, .col_in(col37), .tag_in(g_tag),
    .out_valid(o_valid), .tag_out(o_tag), .quadrant(o_quad), .sector(o_sector)
  );

  // Column delay aligning the BRIEF windows with the orientation result.
  logic [36:0][DW-1:0] bcol_dl [ORIENT_LAT-1];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ORIENT_LAT - 1; i++) bcol_dl[i] <= '0;
    end else if (en) begin
      bcol_dl[0] <= col37;
      for (int i = 1; i < ORIENT_LAT - 1; i++) bcol_dl[i] <= bcol_dl[i-1];
    end
  end

  // ---- matcher, cos/sin, arbiter, BRIEF modules ----
  logic                    match, stale, drop;
  logic signed [8:0]       cos_v, sin_v;
  logic [NUNITS-1:0]       ready, start;

  keypoint_matcher u_match (
    .o_valid, .o_tag, .fifo_empty(kp_empty), .fifo_head(kp_head),
    .match, .stale, .pop(kp_pop)
  );

  sincos_lut #(.SPQ(SPQ)) u_lut (
    .quadrant(o_quad), .sector(o_sector), .cos_o(cos_v), .sin_o(sin_v)
  );

  brief_arbiter #(.N(NUNITS)) u_arb (
    .match, .ready, .start, .drop
  );

  assign st_brief_drop = drop;
  assign st_kp_stale   = stale;
  assign st_dispatch   = match && !drop;

  for (genvar u = 0; u < NUNITS; u++) begin : g_unit
    brief_unit #(.DW(DW), .WIN(37), .NP(NP), .LEVEL(LEVEL), .SPQ(SPQ)) u_brief (
      .clk, .rst_n, .en, .col_in(bcol_dl[ORIENT_LAT-2]),
      .ready(ready[u]), .start(start[u]),
      .kp_tag(o_tag), .kp_score(kp_head.score), .kp_quadrant(o_quad), .kp_sector(o_sector),
      .cos_i(cos_v), .sin_i(sin_v),
      .desc_valid(desc_valid[u]), .desc_ready(desc_ready[u]), .desc_out(desc_out[u])
    );
  end
endmodule
