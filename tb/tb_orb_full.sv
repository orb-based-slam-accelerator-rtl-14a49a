// tb_orb_full: one complete 640x480 frame through the accelerator with
// every parameter at its default (four levels 640x480, 533x400, 444x333,
// 370x277, four BRIEF modules per level). Pixels are streamed back to back
// and descriptors are read every cycle. Each output record is compared with
// the reference model, and every reference keypoint must be either output
// or reported as dropped. The feature matcher is loaded with its full set
// of 64 reference descriptors (reference-model descriptors of every fifth
// keypoint, taken from all levels); its match records are read every cycle
// and compared with a nearest-neighbour search in the testbench.
module tb_orb_full;
  import orb_pkg::*;
  import orb_ref_pkg::*;

  localparam int W = 640, H = 480, L = 4, SPQ = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_tvalid = 0, s_tready, s_tlast = 0;
  logic [7:0] s_tdata = 0;
  logic m_tvalid, m_tready = 0, m_tlast;
  logic [DESC_REC_W-1:0] m_tdata;
  logic frame_err, st_bp;
  logic [L-1:0] st_found, st_ovf, st_drop, st_stale, st_disp, st_flush;
  localparam int NR = 64, MTH = 50;
  logic ref_we = 0, ref_n_we = 0;
  logic [5:0] ref_addr = '0;
  logic [255:0] ref_data = '0;
  logic [6:0] ref_n = '0;
  logic res_valid, res_ready = 1;
  match_rec_t res_rec;
  logic st_match, st_nomatch, st_res_drop, st_match_skip;
  logic [255:0] refs[NR];
  match_rec_t pend, exp_res[$];
  bit pend_match;
  int n_match = 0, n_nomatch = 0, n_res_drop = 0, n_mskip = 0, n_res = 0;

  orb_top dut (
    .clk, .rst_n,
    .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready), .s_axis_tdata(s_tdata), .s_axis_tlast(s_tlast),
    .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .m_axis_tdata(m_tdata), .m_axis_tlast(m_tlast),
    .frame_err, .st_kp_found(st_found), .st_kp_overflow(st_ovf), .st_brief_drop(st_drop),
    .st_kp_stale(st_stale), .st_dispatch(st_disp), .st_flush(st_flush), .st_desc_backpressure(st_bp),
    .ref_we, .ref_addr, .ref_data, .ref_n_we, .ref_n, .res_valid, .res_ready, .res_rec,
    .st_match, .st_nomatch, .st_res_drop, .st_match_skip
  );

  int checks = 0, failures = 0;
  int n_out[L], n_drop[L], n_ovf[L], n_stale[L], n_found[L], n_disp[L], n_flush[L];
  int cyc = 0;
  int n_bp = 0, n_in_stall = 0, n_skip = 0;
  img_t im[L];
  int lw[L], lh[L];
  rdesc_t ref_q[L][$];

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    m_tready <= 1'b1;
    if (rst_n) begin
      // feature matcher model
      n_mskip += st_match_skip;
      // the status pulse of the previous query may coincide with the next one
      if (st_match || st_res_drop || st_nomatch) begin
        checks++;
        if (pend_match == st_nomatch) begin
          failures++;
          $display("matcher decision differs at (%0d,%0d)", pend.x, pend.y);
        end
        if (st_match) exp_res.push_back(pend);
        n_match += st_match; n_nomatch += st_nomatch; n_res_drop += st_res_drop;
      end
      if (m_tvalid && m_tready && dut.q_ready) begin
        desc_rec_t r;
        int best, bi, dd;
        r = m_tdata;
        best = 1000; bi = 0;
        for (int i = 0; i < NR; i++) begin
          dd = $countones(r.desc ^ refs[i]);
          if (dd < best) begin best = dd; bi = i; end
        end
        pend.y = r.y; pend.x = r.x; pend.level = r.level; pend.ref_idx = 8'(bi); pend.hdist = 9'(best);
        pend_match = (best <= MTH);
      end
      if (res_valid && res_ready) begin
        n_res++;
        checks++;
        if (exp_res.size() == 0 || res_rec != exp_res[0]) begin
          failures++;
          $display("match record %h unexpected", res_rec);
        end
        if (exp_res.size() > 0) void'(exp_res.pop_front());
      end
      n_bp       += st_bp;
      n_in_stall += (s_tvalid && !s_tready);
      n_skip     += (dut.lv_valid[0] && !dut.g_level[1].g_scaler.u_scaler.out_valid);
      for (int l = 0; l < L; l++) begin
        n_drop[l]  += st_drop[l];
        n_ovf[l]   += st_ovf[l];
        n_stale[l] += st_stale[l];
        n_found[l] += st_found[l];
        n_disp[l]  += st_disp[l];
        n_flush[l] += st_flush[l];
      end
      if (m_tvalid && m_tready) begin
        desc_rec_t r;
        int k, l;
        r = m_tdata;
        l = int'(r.level);
        k = -1;
        foreach (ref_q[l][i]) if (ref_q[l][i].x == r.x && ref_q[l][i].y == r.y) k = i;
        n_out[l]++;
        checks++;
        if (k < 0) begin
          failures++;
          $display("unexpected keypoint L%0d (%0d,%0d)", l, r.x, r.y);
        end else if (r.desc !== ref_q[l][k].desc || r.score != ref_q[l][k].score ||
                     r.quadrant != ref_q[l][k].quad || r.sector != ref_q[l][k].sector || !m_tlast) begin
          failures++;
          $display("mismatch L%0d (%0d,%0d)", l, r.x, r.y);
        end
      end
    end
  end

  initial begin
    for (int l = 0; l < L; l++) begin
      n_out[l] = 0; n_drop[l] = 0; n_ovf[l] = 0; n_stale[l] = 0; n_found[l] = 0;
      n_disp[l] = 0; n_flush[l] = 0;
    end
    im[0] = make_image(W, H, 3);
    lw[0] = W; lh[0] = H;
    for (int l = 1; l < L; l++) im[l] = scale(im[l-1], lw[l-1], lh[l-1], lw[l], lh[l]);
    for (int l = 0; l < L; l++) begin
      level_ref(im[l], lw[l], lh[l], 20, 21, SPQ, NPAIRS, ref_q[l]);
      $display("level %0d: %0dx%0d, %0d reference keypoints", l, lw[l], lh[l], ref_q[l].size());
    end
    for (int i = 0; i < NR; i++) refs[i] = ref_q[i % L][(5 * i) % ref_q[i % L].size()].desc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NR; i++) begin
      ref_we <= 1; ref_addr <= 6'(i); ref_data <= refs[i];
      @(posedge clk);
    end
    ref_we <= 0; ref_n_we <= 1; ref_n <= 7'(NR);
    @(posedge clk);
    ref_n_we <= 0;
    for (int f = 0; f < 1; f++) begin
      for (int i = 0; i < W * H; i++) begin
        s_tvalid <= 1;
        s_tdata  <= 8'(im[0][i]);
        s_tlast  <= (i == W * H - 1);
        @(posedge clk);
        while (!s_tready) @(posedge clk);
      end
      s_tvalid <= 0;
      s_tlast  <= 0;
      repeat (200) @(posedge clk);
    end
    repeat (3000) @(posedge clk);
    for (int l = 0; l < L; l++) begin
      checks++;
      if (n_out[l] + n_drop[l] + n_ovf[l] + n_stale[l] != 1 * ref_q[l].size()
          || n_found[l] != 1 * ref_q[l].size() || n_disp[l] != n_out[l]) begin
        failures++;
        $display("level %0d accounting: found %0d out %0d disp %0d drop %0d ovf %0d stale %0d ref %0d",
                 l, n_found[l], n_out[l], n_disp[l], n_drop[l], n_ovf[l], n_stale[l], 1 * ref_q[l].size());
      end
      $display("level %0d: found %0d dispatched %0d out %0d brief-drop %0d fifo-overflow %0d stale %0d flush %0d",
               l, n_found[l], n_disp[l], n_out[l], n_drop[l], n_ovf[l], n_stale[l], n_flush[l]);
    end
    $display("desc back-pressure %0d, input stalls %0d, scaler skips %0d", n_bp, n_in_stall, n_skip);
    begin
      int td = 0, to = 0, tf = 0, tdisp = 0;
      for (int l = 0; l < L; l++) begin
        td += n_drop[l]; to += n_ovf[l]; tf += (n_flush[l] > 0); tdisp += (n_disp[l] > 0);
      end
      checks++; if (tdisp != L)  begin failures++; $display("a level never dispatched"); end
      $display("matcher: match %0d no-match %0d result-drop %0d busy-skip %0d records read %0d",
               n_match, n_nomatch, n_res_drop, n_mskip, n_res);
      checks++; if (n_match == 0)    begin failures++; $display("matcher never matched"); end
      checks++; if (exp_res.size() != 0 || n_res != n_match) begin failures++; $display("match records missing"); end
      checks++; if (frame_err)   begin failures++; $display("frame_err set"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
