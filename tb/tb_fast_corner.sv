// tb_fast_corner: random and constructed 7x7 windows (arcs of 8, 9 and 12
// brighter or darker circle pixels, wrapping arcs) are applied with random
// idle cycles; the score output two steps later is
// compared with the reference segment test and SAD score.
module tb_fast_corner;
  import orb_pkg::*;
  import orb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0;
  logic [6:0][6:0][7:0] win;
  tag_t tag_in, tag_out;
  logic [11:0] score_out;
  int checks = 0, failures = 0, ncorner = 0;
  int exp_s[$];
  int exp_t[$];
  int dx[16] = '{0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3, -3, -3, -2, -1};
  int dy[16] = '{-3, -3, -2, -1, 0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3};

  fast_corner #(.TH(20)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    img_t im;
    im = new[49];
    win = '0; tag_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int p, len, st, kind;
      p = 30 + $urandom % 190;
      for (int i = 0; i < 49; i++) im[i] = p + int'($urandom % 21) - 10;
      kind = $urandom % 4;
      len = (kind == 0) ? 8 : (kind == 1) ? 9 : 12;
      st = $urandom % 16;
      if (kind != 3)
        for (int k = 0; k < len; k++) begin
          int b;
          b = (($urandom % 2) ? 1 : -1) * ((t % 2) ? 21 : 21 + int'($urandom % 20));
          if (t % 4 < 2) b = (b > 0) ? b : -b; else b = (b < 0) ? b : -b;
          im[(3 + dy[(st + k) % 16]) * 7 + 3 + dx[(st + k) % 16]] = p + b;
        end
      foreach (im[i]) begin
        if (im[i] < 0) im[i] = 0;
        if (im[i] > 255) im[i] = 255;
      end
      @(negedge clk);
      en = ($urandom % 4 != 0);
      for (int r = 0; r < 7; r++) for (int c = 0; c < 7; c++) win[r][c] = 8'(im[r * 7 + c]);
      tag_in = '{valid: 1'b1, frame: 1'b0, y: YW'(t % 1000), x: XW'(t % 977)};
      if (en) begin
        exp_s.push_back(fast_score(im, 7, 3, 3, 20));
        exp_t.push_back(int'(tag_in));
      end
      @(posedge clk);
      #1;
      if (en && exp_s.size() > 1) begin
        checks++;
        if (int'(score_out) != exp_s[0] || int'(tag_out) != exp_t[0]) begin
          failures++;
          $display("score %0d exp %0d tag %h exp %h", score_out, exp_s[0], tag_out, exp_t[0]);
        end
        ncorner += (exp_s[0] != 0);
        void'(exp_s.pop_front());
        void'(exp_t.pop_front());
      end
    end
    checks++;
    if (ncorner < 100) begin failures++; $display("only %0d corners", ncorner); end
    $display("corners %0d", ncorner);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
