// brief_unit: one rBRIEF module (paper Sec. 4.6, Fig. 16): a 37x37 window,
// a rotator and a descriptor generator producing a 256-bit descriptor.
//
// States:
//   LOAD   the window shifts in one column per enabled stream step; after
//          WIN steps (the paper's 37-cycle reload) it holds a full window
//          and the unit is ready.
//   READY  the window keeps sliding with the stream; ready is high. A start
//          pulse (from the arbiter, in the cycle after the orientation
//          result for the window centre appeared) freezes the window at
//          that clock edge and captures the keypoint, cos and sin.
//   RUN    pattern pair i (i = 0..NPAIRS-1) is fed to the rotator, one per
//          cycle; the generator looks both rotated points up in the frozen
//          window one cycle later and sets descriptor bit i = I(A) > I(B)
//          the cycle after that, so a descriptor takes NPAIRS + 3 cycles.
//   DONE   desc_valid is high until desc_ready accepts the record; the unit
//          then returns to LOAD.
// The window follows window_buffer's layout: win[r][c], r = WIN-1 newest
// row, c = WIN-1 newest column, centre at [WIN/2][WIN/2]; a pattern point
// (x, y) is read from win[C + y][C + x].
module brief_unit
  import orb_pkg::*;
#(
  parameter int unsigned DW     = 6,
  parameter int unsigned WIN    = 37,
  parameter int unsigned NP     = NPAIRS,
  parameter logic [1:0]  LEVEL  = 2'd0,
  parameter int unsigned SPQ    = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       en,
  input  logic [WIN-1:0][DW-1:0]     col_in,
  output logic                       ready,
  input  logic                       start,
  input  tag_t                       kp_tag,
  input  logic [11:0]                kp_score,
  input  logic [1:0]                 kp_quadrant,
  input  logic [$clog2(SPQ)-1:0]     kp_sector,
  input  logic signed [8:0]          cos_i,
  input  logic signed [8:0]          sin_i,
  output logic                       desc_valid,
  input  logic                       desc_ready,
  output desc_rec_t                  desc_out
);
  localparam int unsigned C  = WIN / 2;
  localparam int unsigned IW = $clog2(NP);
  localparam pattern_t    PAT = brief_pattern();

  typedef enum logic [1:0] {S_LOAD, S_READY, S_RUN, S_DONE} state_t;
  state_t state;

  logic [WIN-1:0][WIN-1:0][DW-1:0] win;
  logic [$clog2(WIN+1)-1:0]        load_cnt;
  logic [IW:0]                     feed_cnt;
  logic signed [8:0]               cos_r, sin_r;
  logic                            rot_valid, lk_valid;
  logic [IW-1:0]                   rot_idx, lk_idx;
  ppair_t                          rot_pair;
  logic [DW-1:0]                   pa, pb;
  logic                            feed;
  logic                            win_shift;

  assign ready     = (state == S_READY);
  assign feed      = (state == S_RUN) && !feed_cnt[IW];
  assign win_shift = en && ((state == S_LOAD) || (state == S_READY && !start));

  // The window has no reset: after reset the unit is in LOAD and refills
  // all WIN columns before it reports ready.
  always_ff @(posedge clk) begin
    if (win_shift) begin
      for (int r = 0; r < WIN; r++) begin
        for (int c = 0; c < WIN - 1; c++) win[r][c] <= win[r][c+1];
        win[r][WIN-1] <= col_in[r];
      end
    end
  end

  brief_rotator #(.R(C), .IW(IW)) u_rot (
    .clk, .rst_n,
    .in_valid(feed), .idx_in(feed_cnt[IW-1:0]), .pair_in(PAT[feed_cnt[IW-1:0]]),
    .cos_i(cos_r), .sin_i(sin_r),
    .out_valid(rot_valid), .idx_out(rot_idx), .pair_out(rot_pair)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD; load_cnt <= '0; feed_cnt <= '0;
      cos_r <= '0; sin_r <= '0; lk_valid <= 1'b0; lk_idx <= '0;
      pa <= '0; pb <= '0; desc_valid <= 1'b0; desc_out <= '0;
    end else begin
      // generator: look-up stage then compare stage
      lk_valid <= rot_valid;
      lk_idx   <= rot_idx;
      if (rot_valid) begin
        pa <= win[int'(C) + int'(rot_pair[2])][int'(C) + int'(rot_pair[3])];
        pb <= win[int'(C) + int'(rot_pair[0])][int'(C) + int'(rot_pair[1])];
      end
      if (lk_valid) desc_out.desc[lk_idx] <= (pa > pb);

      unique case (state)
        S_LOAD: begin
          if (en) begin
            if (load_cnt == ($clog2(WIN+1))'(WIN - 1)) state <= S_READY;
            load_cnt <= load_cnt + 1'b1;
          end
        end
        S_READY: begin
          if (start) begin
            state    <= S_RUN;
            feed_cnt <= '0;
            cos_r    <= cos_i;
            sin_r    <= sin_i;
            desc_out.x        <= kp_tag.x;
            desc_out.y        <= kp_tag.y;
            desc_out.score    <= kp_score;
            desc_out.quadrant <= kp_quadrant;
            desc_out.sector   <= 6'(kp_sector);
            desc_out.level    <= LEVEL;
            desc_out.rsvd     <= '0;
          end
        end
        S_RUN: begin
          if (feed) feed_cnt <= feed_cnt + 1'b1;
          // last bit written in this cycle
          if (lk_valid && lk_idx == IW'(NP - 1)) begin
            state      <= S_DONE;
            desc_valid <= 1'b1;
          end
        end
        S_DONE: begin
          if (desc_ready) begin
            desc_valid <= 1'b0;
            state      <= S_LOAD;
            load_cnt   <= '0;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // A start is only issued to a ready unit.
  assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_READY);
  // The record is held stable until it is accepted.
  assert property (@(posedge clk) disable iff (!rst_n)
                   desc_valid && !desc_ready |=> desc_valid && $stable(desc_out));
endmodule
