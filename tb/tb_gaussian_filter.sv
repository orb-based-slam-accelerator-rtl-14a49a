// tb_gaussian_filter: streams a random 6-bit 40x30 image (random idle
// cycles) and checks every output whose centre is at least 3 pixels from
// the border against the 7x7 binomial kernel (1 6 15 20 15 6 1)^2 / 4096
// with rounding, using the centre coordinate on tag_out.
module tb_gaussian_filter;
  import orb_pkg::*;
  localparam int W = 40, H = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0;
  logic [5:0] pix = 0, pix_out;
  tag_t tag_in = '0, tag_out;
  int checks = 0, failures = 0;
  int im[W * H];

  gaussian_filter #(.W(W), .DW(6)) dut (.*);

  function automatic int g(int x, int y);
    int b[7] = '{1, 6, 15, 20, 15, 6, 1};
    int acc = 0;
    for (int j = 0; j < 7; j++) for (int i = 0; i < 7; i++)
      acc += b[j] * b[i] * im[(y + j - 3) * W + x + i - 3];
    return (acc + 2048) / 4096;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    if (en_d && tag_out.valid && tag_out.x >= 3 && tag_out.x < W - 3 && tag_out.y >= 3 && tag_out.y < H - 3) begin
      checks++;
      if (int'(pix_out) != g(int'(tag_out.x), int'(tag_out.y))) begin
        failures++;
        $display("(%0d,%0d): %0d exp %0d", tag_out.x, tag_out.y, pix_out, g(int'(tag_out.x), int'(tag_out.y)));
      end
    end
  end
  logic en_d = 0;
  always @(posedge clk) en_d <= en;

  initial begin
    foreach (im[i]) im[i] = (i % 7 == 0) ? 63 : int'($urandom % 64);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < W * H + 2 * W; i++) begin
      while ($urandom % 5 == 0) begin en <= 0; @(posedge clk); end
      en <= 1;
      pix <= 6'(im[i % (W * H)]);
      tag_in <= '{valid: i < W * H, frame: 1'b0, y: YW'((i / W) % H), x: XW'(i % W)};
      @(posedge clk);
    end
    en <= 0;
    repeat (3) @(posedge clk);
    checks++;
    if (checks < (W - 6) * (H - 6)) begin failures++; $display("too few outputs %0d", checks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
