// tb_fast_detector: streams two frames of a synthetic 64x48 image (random
// idle cycles) through the FAST path and checks that the keypoints come out
// in raster order, each equal to the reference FAST + NMS result (position,
// score, frame parity), with none missing.
module tb_fast_detector;
  import orb_pkg::*;
  import orb_ref_pkg::*;
  localparam int W = 64, H = 48, EDGE = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0, kp_valid;
  logic [7:0] pix = 0;
  tag_t tag_in = '0;
  kp_t kp;
  int checks = 0, failures = 0, n = 0;
  img_t im;
  rkp_t q[$];

  fast_detector #(.W(W), .H(H), .TH(20), .EDGE(EDGE)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (kp_valid) begin
    int k;
    k = n % q.size();
    checks++;
    if (int'(kp.x) != q[k].x || int'(kp.y) != q[k].y || int'(kp.score) != q[k].score ||
        kp.frame != 1'(n / q.size())) begin
      failures++;
      $display("kp %0d: (%0d,%0d) %0d exp (%0d,%0d) %0d", n, kp.x, kp.y, kp.score, q[k].x, q[k].y, q[k].score);
    end
    n++;
  end

  initial begin
    im = make_image(W, H, 11);
    keypoints(im, W, H, 20, EDGE, q);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++)
      for (int i = 0; i < W * H; i++) begin
        while ($urandom % 6 == 0) begin en <= 0; @(posedge clk); end
        en <= 1;
        pix <= 8'(im[i]);
        tag_in <= '{valid: 1'b1, frame: 1'(f), y: YW'(i / W), x: XW'(i % W)};
        @(posedge clk);
      end
    // a few more steps of the next frame's first row drain the pipeline
    for (int i = 0; i < 2 * W; i++) begin
      en <= 1; pix <= 0; tag_in <= '{valid: 1'b1, frame: 1'b0, y: YW'(i / W), x: XW'(i % W)};
      @(posedge clk);
    end
    en <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (n != 2 * q.size() || q.size() < 10) begin
      failures++;
      $display("got %0d keypoints, expected %0d", n, 2 * q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
