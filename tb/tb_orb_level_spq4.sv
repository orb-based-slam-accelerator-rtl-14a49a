// tb_orb_level_spq4: the same end-to-end check of one pyramid level as
// tb_orb_level, but with 4 orientation sectors per quadrant (16 sectors in
// total), where the orientation compares against the shift-add tangent
// constants 0.1875, 0.65625, 1.5 and 5 and the BRIEF modules rotate by the
// four sector-line angles 11.25, 33.75, 56.25 and 78.75 degrees.
// A synthetic image is
// streamed in (with random idle cycles) twice, as two consecutive frames;
// every descriptor record that comes out is compared field by field with the
// reference model (keypoint position, FAST score, quadrant, sector and all
// 256 descriptor bits). Every reference keypoint must be accounted for:
// either output or reported dropped (arbiter drop, FIFO overflow, stale).
// Also checks the descriptor latency bound NPAIRS + 3 cycles per unit.
module tb_orb_level_spq4;
  import orb_pkg::*;
  import orb_ref_pkg::*;

  localparam int W = 96, H = 80, NU = 2, SPQ = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pix_valid = 0;
  logic [7:0] pix = 0;
  logic [NU-1:0] desc_valid, desc_ready;
  desc_rec_t [NU-1:0] desc_out;
  logic st_kp_found, st_kp_overflow, st_brief_drop, st_kp_stale, st_dispatch, st_flush;

  orb_level #(.W(W), .H(H), .LEVEL(2'd1), .NUNITS(NU), .KP_DEPTH(64), .SPQ(SPQ)) dut (
    .clk, .rst_n, .pix_valid, .pix, .desc_valid, .desc_ready, .desc_out,
    .st_kp_found, .st_kp_overflow, .st_brief_drop, .st_kp_stale, .st_dispatch, .st_flush
  );

  int checks = 0, failures = 0;
  int n_out = 0, n_drop = 0, n_ovf = 0, n_stale = 0, n_found = 0, n_flush = 0;
  img_t im;
  rdesc_t ref_q[$];
  int t0[NU], cyc = 0;
  logic [NU-1:0] pv = '0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    desc_ready <= NU'($urandom);
    cyc++;
    if (rst_n) begin
      n_drop  += st_brief_drop;
      n_ovf   += st_kp_overflow;
      n_stale += st_kp_stale;
      n_found += st_kp_found;
      n_flush += st_flush;
      for (int u = 0; u < NU; u++) begin
        if (dut.start[u]) t0[u] = cyc;
        if (desc_valid[u] && !pv[u]) begin
          checks++;
          if (cyc - t0[u] != NPAIRS + 3) begin
            failures++;
            $display("unit %0d took %0d cycles", u, cyc - t0[u]);
          end
        end
        pv[u] = desc_valid[u];
        if (desc_valid[u] && desc_ready[u]) begin
          int k;
          k = -1;
          foreach (ref_q[i]) if (ref_q[i].x == desc_out[u].x && ref_q[i].y == desc_out[u].y) k = i;
          n_out++;
          checks++;
          if (k < 0) begin
            failures++;
            $display("unexpected keypoint (%0d,%0d)", desc_out[u].x, desc_out[u].y);
          end else begin
            if (desc_out[u].desc !== ref_q[k].desc || desc_out[u].score != ref_q[k].score ||
                desc_out[u].quadrant != ref_q[k].quad || desc_out[u].sector != ref_q[k].sector ||
                desc_out[u].level != 2'd1) begin
              failures++;
              $display("mismatch at (%0d,%0d): q %0d/%0d s %0d/%0d score %0d/%0d desc %0s",
                       ref_q[k].x, ref_q[k].y, desc_out[u].quadrant, ref_q[k].quad,
                       desc_out[u].sector, ref_q[k].sector, desc_out[u].score, ref_q[k].score,
                       (desc_out[u].desc === ref_q[k].desc) ? "ok" : "differs");
            end
          end
        end
      end
    end
  end

  task automatic send_frame();
    for (int i = 0; i < W * H; i++) begin
      while ($urandom % 8 == 0) begin
        pix_valid <= 0;
        @(posedge clk);
      end
      pix_valid <= 1;
      pix <= 8'(im[i]);
      @(posedge clk);
    end
    pix_valid <= 0;
  endtask

  initial begin
    im = make_image(W, H, 11);
    level_ref(im, W, H, 20, 21, SPQ, NPAIRS, ref_q);
    $display("reference keypoints per frame: %0d", ref_q.size());
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    send_frame();
    repeat (50) @(posedge clk);
    send_frame();
    repeat (2000) @(posedge clk);
    checks++;
    if (n_out + n_drop + n_ovf + n_stale != 2 * ref_q.size()) begin
      failures++;
      $display("accounting: out %0d drop %0d ovf %0d stale %0d ref %0d", n_out, n_drop, n_ovf,
               n_stale, 2 * ref_q.size());
    end
    checks++;
    if (n_found != 2 * ref_q.size()) begin
      failures++;
      $display("found %0d keypoints, expected %0d", n_found, 2 * ref_q.size());
    end
    checks++;
    if (n_out == 0 || n_flush == 0) begin
      failures++;
      $display("no output (%0d) or no flush (%0d)", n_out, n_flush);
    end
    $display("out %0d drop %0d ovf %0d stale %0d flush %0d", n_out, n_drop, n_ovf, n_stale, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
