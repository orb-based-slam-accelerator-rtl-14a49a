// tb_brief_rotator: random pattern pairs (-13..13) and every sector and
// quadrant's cos/sin; the rotated coordinates one cycle later are compared
// with a floating-point rotation rounded to the nearest integer (half up)
// and clamped to +-18.
module tb_brief_rotator;
  import orb_pkg::*;
  import orb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic [7:0] idx_in = 0, idx_out;
  ppair_t pair_in = '0, pair_out;
  logic signed [8:0] cos_i = 0, sin_i = 0;
  int checks = 0, failures = 0;

  brief_rotator #(.R(18), .IW(8)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      int c, s, v[4];
      @(negedge clk);
      c = trig_q(t % 16, 16, 0); s = trig_q(t % 16, 16, 1);
      if ((t / 16) % 2) c = -c;
      if ((t / 32) % 2) s = -s;
      cos_i = 9'(c); sin_i = 9'(s);
      for (int k = 0; k < 4; k++) v[k] = int'($urandom % 27) - 13;
      pair_in = {6'(v[0]), 6'(v[1]), 6'(v[2]), 6'(v[3])};
      in_valid = 1'($urandom);
      idx_in = 8'(t);
      @(posedge clk);
      #1;
      checks++;
      if (out_valid != in_valid || idx_out != idx_in ||
          int'(pair_out[3]) != rotc(v[0], v[1], c, s, 0) || int'(pair_out[2]) != rotc(v[0], v[1], c, s, 1) ||
          int'(pair_out[1]) != rotc(v[2], v[3], c, s, 0) || int'(pair_out[0]) != rotc(v[2], v[3], c, s, 1)) begin
        failures++;
        $display("t %0d: (%0d,%0d)->(%0d,%0d)", t, v[0], v[1], pair_out[3], pair_out[2]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
