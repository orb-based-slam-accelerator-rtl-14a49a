// hamming_matcher: brute-force Hamming-distance matcher of extracted ORB
// descriptors against a set of reference descriptors (the keypoints already
// mapped in the frame), paper Sec. 4.7 "Feature matching".
//
// The host loads up to NREF 256-bit reference descriptors through a simple
// write port (ref_we/ref_addr/ref_data) and sets how many are valid with
// ref_n_we/ref_n. Query records (desc_rec_t) are accepted one at a time on a
// valid/ready handshake. For an accepted query the matcher visits one
// reference per cycle, computes popcount(query XOR reference) and keeps the
// smallest distance (the lowest index wins ties). After the last reference a
// query whose best distance is at most TH is a match: a match record (query
// x, y, level, best reference index, distance) is written into the result
// buffer, which the host drains through res_valid/res_ready. A query that
// finds no match, or finds the result buffer full, produces no record and a
// one-cycle status pulse (st_nomatch / st_res_drop).
//
// Timing: q_ready is high when idle; a query takes ref_n + 1 cycles from
// acceptance until its result is written (ref_n = 0 gives an immediate
// no-match). The result buffer is first-word fall-through.
//
// Follows the paper: Hamming distance between a descriptor and the mapped
// keypoints, thresholded, matches stored in a buffer for the CPU. This
// design's choices: one reference per cycle, "match" means distance <= TH
// (the usual sense; the paper's text says "above the given threshold"), TH
// default 50 (ORB-SLAM's low matching threshold), the reference set size and
// the record format. The paper's score-sorting heap that evicts older
// keypoints to DRAM, and holding results until the end of the frame, are not
// part of this block: queries come straight from the descriptor stream.
module hamming_matcher
  import orb_pkg::*;
#(
  parameter int unsigned NREF      = 64,
  parameter int unsigned TH        = 50,
  parameter int unsigned RES_DEPTH = 64,
  localparam int unsigned AW       = (NREF > 1) ? $clog2(NREF) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // reference set, written by the host
  input  logic                  ref_we,
  input  logic [AW-1:0]         ref_addr,
  input  logic [255:0]          ref_data,
  input  logic                  ref_n_we,
  input  logic [AW:0]           ref_n,
  // queries
  input  logic                  q_valid,
  output logic                  q_ready,
  input  desc_rec_t             q_rec,
  // results
  output logic                  res_valid,
  input  logic                  res_ready,
  output match_rec_t            res_rec,
  // status pulses
  output logic                  st_match,
  output logic                  st_nomatch,
  output logic                  st_res_drop
);
  logic [255:0] refs [NREF];
  logic [AW:0]  nref_q;

  always_ff @(posedge clk) begin
    if (ref_we) refs[ref_addr] <= ref_data;
  end

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_t;
  state_t       state;
  desc_rec_t    q;
  logic [AW:0]  idx;
  logic [8:0]   best_d;
  logic [AW-1:0] best_i;

  // distance of the current reference
  logic [8:0]   d;
  always_comb d = 9'($countones(q.desc ^ refs[idx[AW-1:0]]));

  match_rec_t   m;
  logic         res_full, res_empty, push;
  always_comb begin
    m          = '0;
    m.y        = q.y;
    m.x        = q.x;
    m.level    = q.level;
    m.ref_idx  = 8'(best_i);
    m.hdist     = best_d;
  end
  assign push = (state == S_DONE) && (best_d <= 9'(TH)) && !res_full;

  assign q_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; q <= '0; idx <= '0; best_d <= '1; best_i <= '0; nref_q <= '0;
      st_match <= 1'b0; st_nomatch <= 1'b0; st_res_drop <= 1'b0;
    end else begin
      st_match <= 1'b0; st_nomatch <= 1'b0; st_res_drop <= 1'b0;
      if (ref_n_we) nref_q <= (ref_n > (AW+1)'(NREF)) ? (AW+1)'(NREF) : ref_n;
      unique case (state)
        S_IDLE: if (q_valid) begin
          q      <= q_rec;
          idx    <= '0;
          best_d <= '1;
          best_i <= '0;
          state  <= (nref_q == 0) ? S_DONE : S_RUN;
        end
        S_RUN: begin
          if (d < best_d) begin
            best_d <= d;
            best_i <= idx[AW-1:0];
          end
          if (idx == nref_q - 1'b1) state <= S_DONE;
          else                      idx   <= idx + 1'b1;
        end
        S_DONE: begin
          st_match    <= (best_d <= 9'(TH)) && !res_full;
          st_res_drop <= (best_d <= 9'(TH)) && res_full;
          st_nomatch  <= (best_d > 9'(TH));
          state       <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  logic [$clog2(RES_DEPTH+1)-1:0] res_count;
  sync_fifo #(.WIDTH($bits(match_rec_t)), .DEPTH(RES_DEPTH)) u_res_fifo (
    .clk, .rst_n, .wr_en(push), .wr_data(m), .rd_en(res_valid && res_ready),
    .rd_data(res_rec), .empty(res_empty), .full(res_full), .count(res_count)
  );
  assign res_valid = !res_empty;

  // A query is only taken while idle; the result port holds its word while
  // the host is not ready.
  assert property (@(posedge clk) disable iff (!rst_n)
                   res_valid && !res_ready |=> res_valid && $stable(res_rec));
endmodule
