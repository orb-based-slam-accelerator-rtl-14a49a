// tb_nms: random 3x3 score windows with many ties and random centre
// coordinates (inside and outside the border margin); kp_valid and the
// keypoint fields one cycle later are compared with the suppression rule
// (strict against the row above and the left pixel, >= against the right
// pixel and the row below, non-zero score, EDGE margin).
module tb_nms;
  import orb_pkg::*;
  localparam int W = 64, H = 48, EDGE = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0, kp_valid;
  logic [2:0][2:0][11:0] win = '0;
  tag_t tag_in = '0;
  kp_t kp;
  int checks = 0, failures = 0, nkp = 0;

  nms #(.W(W), .H(H), .EDGE(EDGE)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      bit expv;
      int s;
      @(negedge clk);
      en = ($urandom % 5 != 0);
      for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) win[r][c] = 12'($urandom % 6);
      tag_in.valid = ($urandom % 10 != 0);
      tag_in.frame = 1'($urandom);
      tag_in.x = XW'($urandom % W);
      tag_in.y = YW'($urandom % H);
      s = int'(win[1][1]);
      expv = en && tag_in.valid && s > 0;
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++) begin
          if (r == 1 && c == 1) continue;
          if (r == 0 || (r == 1 && c == 0)) expv &= s > int'(win[r][c]);
          else expv &= s >= int'(win[r][c]);
        end
      expv &= tag_in.x >= EDGE && tag_in.x < W - EDGE && tag_in.y >= EDGE && tag_in.y < H - EDGE;
      @(posedge clk);
      #1;
      checks++;
      if (kp_valid != expv || (expv && (kp.x != tag_in.x || kp.y != tag_in.y ||
                                        kp.score != 12'(s) || kp.frame != tag_in.frame))) begin
        failures++;
        $display("t %0d: kp_valid %0d exp %0d", t, kp_valid, expv);
      end
      nkp += expv;
    end
    checks++;
    if (nkp < 50) begin failures++; $display("only %0d keypoints", nkp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
