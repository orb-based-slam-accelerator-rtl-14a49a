// tb_brief_unit: streams the columns of a random 6-bit 60x70 image into one
// BRIEF module (random idle cycles) and starts it on several window centres
// with random quadrant and sector. Checks: the 256-bit descriptor against
// the reference rotated-BRIEF model (so the window must stay frozen while
// the stream moves on); the record fields; the latency from start to
// desc_valid, NPAIRS + 3 cycles (one pair per cycle plus rotator, look-up
// and generator stages); that desc_valid holds under back-pressure; and
// that ready returns exactly 37 enabled stream steps after the record is
// accepted (the window reload).
module tb_brief_unit;
  import orb_pkg::*;
  import orb_ref_pkg::*;
  localparam int W = 60, H = 70;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0, ready, start = 0, desc_valid, desc_ready = 0;
  logic [36:0][5:0] col_in = '0;
  tag_t kp_tag = '0;
  logic [11:0] kp_score = 0;
  logic [1:0] kp_quadrant = 0;
  logic [3:0] kp_sector = 0;
  logic signed [8:0] cos_i = 0, sin_i = 0;
  desc_rec_t desc_out;
  int checks = 0, failures = 0, nkp = 0;
  img_t g;

  brief_unit #(.DW(6), .WIN(37), .LEVEL(2'd2), .SPQ(16)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // drive the column of raster pixel i (bottom row of the column)
  task automatic put_col(int i);
    for (int r = 0; r < 37; r++) begin
      int yy;
      yy = i / W - 36 + r;
      col_in[r] = (yy >= 0) ? 6'(g[yy * W + i % W]) : 6'd0;
    end
  endtask

  initial begin
    int i, c, s, q, k, t0, steps;
    g = new[W * H];
    foreach (g[j]) g[j] = int'($urandom % 64);

    repeat (2) @(posedge clk);
    rst_n = 1;
    i = 0;
    while (i < W * H - 400) begin
      int cx, cy;
      @(negedge clk);
      start = 0;
      en = ($urandom % 4 != 0);
      if (en) begin
        put_col(i);
        i++;
      end
      cx = (i - 1) % W - 18; cy = (i - 1) / W - 18;
      @(posedge clk);
      // after this edge the window is centred on (cx, cy)
      if (en && ready && cx >= 18 && cx < W - 18 && cy >= 18 && cy < H - 18 && $urandom % 3 == 0) begin
        @(negedge clk);
        q = $urandom % 4; k = $urandom % 16;
        c = trig_q(k, 16, 0); s = trig_q(k, 16, 1);
        if (q & 2) c = -c;
        if (q & 1) s = -s;
        start = 1; en = 1; put_col(i); i++;  // stream keeps moving, window must freeze
        kp_tag = '{valid: 1'b1, frame: 1'b1, y: YW'(cy), x: XW'(cx)};
        kp_score = 12'($urandom); kp_quadrant = 2'(q); kp_sector = 4'(k);
        cos_i = 9'(c); sin_i = 9'(s);
        t0 = 0;
        @(posedge clk);
        @(negedge clk);
        start = 0;
        while (!desc_valid) begin
          t0++;
          en = ($urandom % 2 == 0);
          if (en) begin put_col(i); i++; end
          @(negedge clk);
        end
        checks++;
        if (t0 + 1 != NPAIRS + 3) begin failures++; $display("latency %0d", t0 + 1); end
        repeat ($urandom % 4) begin
          @(negedge clk);
          checks++;
          if (!desc_valid) begin failures++; $display("desc_valid dropped"); end
        end
        checks++;
        if (desc_out.desc !== descriptor(g, W, cx, cy, q, k, 16, NPAIRS) || desc_out.x != XW'(cx) ||
            desc_out.y != YW'(cy) || desc_out.quadrant != 2'(q) || desc_out.sector != 6'(k) ||
            desc_out.level != 2'd2 || desc_out.score != kp_score) begin
          failures++;
          $display("descriptor mismatch at (%0d,%0d) q %0d k %0d", cx, cy, q, k);
        end
        nkp++;
        desc_ready = 1;
        en = 0;
        @(negedge clk);
        desc_ready = 0;
        steps = 0;
        while (!ready) begin
          en = ($urandom % 2 == 0);
          if (en) begin put_col(i); i++; steps++; end
          @(negedge clk);
          #0;
        end
        en = 0;
        checks++;
        if (steps != 37) begin failures++; $display("reload took %0d steps", steps); end
      end
    end
    checks++;
    if (nkp < 3) begin failures++; $display("only %0d keypoints", nkp); end
    $display("keypoints %0d", nkp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
