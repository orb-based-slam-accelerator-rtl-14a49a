// orb_top: streaming ORB feature extraction accelerator for the programmable
// logic of a Zynq-class SoC (paper Sec. 4, Fig. 8 and 9).
//
// Grey-scale 8-bit pixels arrive from the DMA on an AXI4-Stream slave, one
// pixel per beat, IMG_W x IMG_H per frame in raster order, and enter the
// input FIFO. The FIFO feeds pyramid level 0 directly and a chain of
// LEVELS-1 image scalers (scale 5/6 each) that feed levels 1..LEVELS-1, so
// all levels of the pyramid are processed in parallel from a single pass
// over the image without a frame buffer. Each level (orb_level) outputs
// descriptors from NUNITS BRIEF modules; a fixed-priority collector (lowest
// level and unit first, this design's choice) moves one finished descriptor
// per cycle into the descriptor FIFO, which drives the AXI4-Stream master
// back to the DMA: one 320-bit beat per keypoint (desc_rec_t: descriptor,
// x, y, level, quadrant, sector, FAST score), tlast on every beat.
// The accelerator takes a pixel every cycle the input FIFO is not empty; it
// never stalls the pixel stream (keypoints are dropped instead, as in the
// paper). s_axis_tlast is expected on the last pixel of a frame; a mismatch
// with the internal pixel count sets the sticky frame_err flag.
// Every descriptor record that leaves is also offered to the feature matcher
// (hamming_matcher), which compares it with up to NREF reference descriptors
// loaded by the CPU and queues match records on a second valid/ready port;
// a record arriving while the matcher is busy is not matched. The paper's
// keypoint heap in front of the matcher is not part of this design.
// Statistics are pulse outputs, per level where they come from a level, for
// counting by the host or a testbench.
module orb_top
  import orb_pkg::*;
#(
  parameter int unsigned IMG_W      = 640,
  parameter int unsigned IMG_H      = 480,
  parameter int unsigned LEVELS     = 4,
  parameter int unsigned NUNITS     = 4,
  parameter int unsigned IN_DEPTH   = 64,
  parameter int unsigned KP_DEPTH   = 128,
  parameter int unsigned DESC_DEPTH = 16,
  parameter int unsigned FAST_TH    = 20,
  parameter int unsigned SPQ        = 16,
  parameter int unsigned NP         = NPAIRS,
  parameter int unsigned NREF       = 64,
  parameter int unsigned MATCH_TH   = 50,
  parameter int unsigned RES_DEPTH  = 64,
  localparam int unsigned RAW       = (NREF > 1) ? $clog2(NREF) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // pixels from the DMA (MM2S)
  input  logic                  s_axis_tvalid,
  output logic                  s_axis_tready,
  input  logic [7:0]            s_axis_tdata,
  input  logic                  s_axis_tlast,
  // descriptors to the DMA (S2MM)
  output logic                  m_axis_tvalid,
  input  logic                  m_axis_tready,
  output logic [DESC_REC_W-1:0] m_axis_tdata,
  output logic                  m_axis_tlast,
  // feature matcher: reference descriptors written by the CPU
  input  logic                  ref_we,
  input  logic [RAW-1:0]        ref_addr,
  input  logic [255:0]          ref_data,
  input  logic                  ref_n_we,
  input  logic [RAW:0]          ref_n,
  // feature matcher: match records read by the CPU
  output logic                  res_valid,
  input  logic                  res_ready,
  output match_rec_t            res_rec,
  // status
  output logic                  frame_err,
  output logic [LEVELS-1:0]     st_kp_found,
  output logic [LEVELS-1:0]     st_kp_overflow,
  output logic [LEVELS-1:0]     st_brief_drop,
  output logic [LEVELS-1:0]     st_kp_stale,
  output logic [LEVELS-1:0]     st_dispatch,
  output logic [LEVELS-1:0]     st_flush,
  output logic                  st_desc_backpressure,
  output logic                  st_match,
  output logic                  st_nomatch,
  output logic                  st_res_drop,
  output logic                  st_match_skip
);
  // ---- input FIFO ----
  logic       in_empty, in_full;
  logic [8:0] in_head;
  logic       pix_valid;
  logic [7:0] pix;
  logic [$clog2(IN_DEPTH+1)-1:0] in_count;

  assign s_axis_tready = !in_full;

  sync_fifo #(.WIDTH(9), .DEPTH(IN_DEPTH)) u_in_fifo (
    .clk, .rst_n, .wr_en(s_axis_tvalid && s_axis_tready), .wr_data({s_axis_tlast, s_axis_tdata}),
    .rd_en(!in_empty), .rd_data(in_head), .empty(in_empty), .full(in_full), .count(in_count)
  );

  assign pix_valid = !in_empty;
  assign pix       = in_head[7:0];

  // frame length check against tlast
  logic [$clog2(IMG_W*IMG_H)-1:0] pcount;
  logic                           last_pix;
  assign last_pix = (pcount == ($clog2(IMG_W*IMG_H))'(IMG_W*IMG_H - 1));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pcount <= '0; frame_err <= 1'b0;
    end else if (pix_valid) begin
      pcount <= last_pix ? '0 : pcount + 1'b1;
      if (in_head[8] != last_pix) frame_err <= 1'b1;
    end
  end

  // ---- pyramid: scalers and level extractors ----
  logic [LEVELS-1:0]      lv_valid;
  logic [LEVELS-1:0][7:0] lv_pix;
  logic [LEVELS-1:0][NUNITS-1:0] d_valid, d_ready;
  desc_rec_t [LEVELS-1:0][NUNITS-1:0] d_rec;

  assign lv_valid[0] = pix_valid;
  assign lv_pix[0]   = pix;

  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    localparam int unsigned LW = level_len(IMG_W, l);
    localparam int unsigned LH = level_len(IMG_H, l);
    if (l > 0) begin : g_scaler
      image_scaler #(.W(level_len(IMG_W, l - 1)), .H(level_len(IMG_H, l - 1))) u_scaler (
        .clk, .rst_n, .in_valid(lv_valid[l-1]), .in_pix(lv_pix[l-1]),
        .out_valid(lv_valid[l]), .out_pix(lv_pix[l])
      );
    end
    orb_level #(
      .W(LW), .H(LH), .LEVEL(2'(l)), .NUNITS(NUNITS), .KP_DEPTH(KP_DEPTH),
      .FAST_TH(FAST_TH), .SPQ(SPQ), .NP(NP)
    ) u_level (
      .clk, .rst_n, .pix_valid(lv_valid[l]), .pix(lv_pix[l]),
      .desc_valid(d_valid[l]), .desc_ready(d_ready[l]), .desc_out(d_rec[l]),
      .st_kp_found(st_kp_found[l]), .st_kp_overflow(st_kp_overflow[l]),
      .st_brief_drop(st_brief_drop[l]), .st_kp_stale(st_kp_stale[l]),
      .st_dispatch(st_dispatch[l]), .st_flush(st_flush[l])
    );
  end

  // ---- descriptor collector and FIFO ----
  logic       out_empty, out_full, col_wr;
  desc_rec_t  col_rec, out_head;
  logic [$clog2(DESC_DEPTH+1)-1:0] out_count;

  always_comb begin
    d_ready = '0;
    col_wr  = 1'b0;
    col_rec = d_rec[0][0];
    for (int l = LEVELS - 1; l >= 0; l--) begin
      for (int u = NUNITS - 1; u >= 0; u--) begin
        if (d_valid[l][u]) begin
          col_wr  = 1'b1;
          col_rec = d_rec[l][u];
        end
      end
    end
    if (!out_full) begin
      for (int l = 0; l < LEVELS; l++) begin
        for (int u = 0; u < NUNITS; u++) begin
          if (d_valid[l][u] && !col_found(l, u)) d_ready[l][u] = 1'b1;
        end
      end
    end
  end

  // true when a unit ahead of (l, u) in priority order has a descriptor
  function automatic logic col_found(int l, int u);
    logic f;
    f = 1'b0;
    for (int i = 0; i < LEVELS; i++)
      for (int j = 0; j < NUNITS; j++)
        if ((i < l || (i == l && j < u)) && d_valid[i][j]) f = 1'b1;
    return f;
  endfunction

  assign st_desc_backpressure = col_wr && out_full;

  sync_fifo #(.WIDTH(DESC_REC_W), .DEPTH(DESC_DEPTH)) u_desc_fifo (
    .clk, .rst_n, .wr_en(col_wr), .wr_data(col_rec), .rd_en(m_axis_tvalid && m_axis_tready),
    .rd_data(out_head), .empty(out_empty), .full(out_full), .count(out_count)
  );

  assign m_axis_tvalid = !out_empty;
  assign m_axis_tdata  = out_head;
  assign m_axis_tlast  = 1'b1;

  // ---- feature matcher ----
  // Every record that leaves on the descriptor stream is also offered to the
  // matcher; a record that finds the matcher busy is not matched
  // (st_match_skip).
  logic m_fire, q_ready;
  assign m_fire = m_axis_tvalid && m_axis_tready;

  hamming_matcher #(.NREF(NREF), .TH(MATCH_TH), .RES_DEPTH(RES_DEPTH)) u_matcher (
    .clk, .rst_n, .ref_we, .ref_addr, .ref_data, .ref_n_we, .ref_n,
    .q_valid(m_fire), .q_ready, .q_rec(desc_rec_t'(m_axis_tdata)),
    .res_valid, .res_ready, .res_rec, .st_match, .st_nomatch, .st_res_drop
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) st_match_skip <= 1'b0;
    else        st_match_skip <= m_fire && !q_ready;
  end

  // AXI-Stream rule: data held while valid and not ready.
  assert property (@(posedge clk) disable iff (!rst_n)
                   m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata));
endmodule
