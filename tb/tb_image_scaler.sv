// tb_image_scaler: scales two 40x31 frames (random gaps in the input) and
// compares every output pixel, in order, with the reference bilinear
// scaler; checks the output count (33x25 per frame) and that each output
// appears exactly one cycle after the input pixel that completed it.
module tb_image_scaler;
  import orb_ref_pkg::*;
  localparam int W = 40, H = 31;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic [7:0] in_pix = 0, out_pix;
  int checks = 0, failures = 0;
  img_t im, ex;
  int w2, h2, n = 0;
  logic prev_in = 0;

  image_scaler #(.W(W), .H(H)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (out_valid) begin
      checks++;
      if (!prev_in || out_pix != 8'(ex[n % (w2 * h2)])) begin
        failures++;
        $display("output %0d: %0d exp %0d", n, out_pix, ex[n % (w2 * h2)]);
      end
      n++;
    end
    prev_in <= in_valid;
  end

  initial begin
    im = new[W * H];
    foreach (im[i]) im[i] = $urandom % 256;
    ex = scale(im, W, H, w2, h2);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++)
      for (int i = 0; i < W * H; i++) begin
        while ($urandom % 5 == 0) begin in_valid <= 0; @(posedge clk); end
        in_valid <= 1;
        in_pix <= 8'(im[i]);
        @(posedge clk);
      end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (n != 2 * w2 * h2 || w2 != 33 || h2 != 25) begin
      failures++;
      $display("count %0d, expected %0d (%0dx%0d)", n, 2 * w2 * h2, w2, h2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
