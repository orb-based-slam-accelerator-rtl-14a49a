// tb_sincos_lut: all 4 quadrants x 16 sectors; compares cos and sin with
// round(256 * cos/sin((k + 0.5) * 5.625 deg)), saturated at 255, with the
// sign set by the quadrant bits. Two more instances check the tables for
// 8 and 4 sectors per quadrant the same way.
module tb_sincos_lut;
  import orb_ref_pkg::*;
  logic [1:0] quadrant;
  logic [3:0] sector;
  logic signed [8:0] cos_o, sin_o;
  int checks = 0, failures = 0;

  sincos_lut #(.SPQ(16)) dut (.*);

  logic [2:0] sector8;
  logic [1:0] sector4;
  logic signed [8:0] cos8, sin8, cos4, sin4;
  sincos_lut #(.SPQ(8)) dut8 (.quadrant, .sector(sector8), .cos_o(cos8), .sin_o(sin8));
  sincos_lut #(.SPQ(4)) dut4 (.quadrant, .sector(sector4), .cos_o(cos4), .sin_o(sin4));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int q = 0; q < 4; q++)
      for (int k = 0; k < 16; k++) begin
        int c, s;
        quadrant = 2'(q); sector = 4'(k);
        #1;
        c = trig_q(k, 16, 0); s = trig_q(k, 16, 1);
        if (q & 2) c = -c;
        if (q & 1) s = -s;
        checks++;
        if (int'(cos_o) != c || int'(sin_o) != s) begin
          failures++;
          $display("q %0d k %0d: %0d %0d exp %0d %0d", q, k, cos_o, sin_o, c, s);
        end
      end
    for (int q = 0; q < 4; q++)
      for (int k = 0; k < 8; k++) begin
        int c8, s8, c4, s4;
        quadrant = 2'(q); sector8 = 3'(k); sector4 = 2'(k % 4);
        #1;
        c8 = trig_q(k, 8, 0); s8 = trig_q(k, 8, 1);
        c4 = trig_q(k % 4, 4, 0); s4 = trig_q(k % 4, 4, 1);
        if (q & 2) begin c8 = -c8; c4 = -c4; end
        if (q & 1) begin s8 = -s8; s4 = -s4; end
        checks += 2;
        if (int'(cos8) != c8 || int'(sin8) != s8) begin
          failures++;
          $display("8/quadrant q %0d k %0d: %0d %0d exp %0d %0d", q, k, cos8, sin8, c8, s8);
        end
        if (int'(cos4) != c4 || int'(sin4) != s4) begin
          failures++;
          $display("4/quadrant q %0d k %0d: %0d %0d exp %0d %0d", q, k % 4, cos4, sin4, c4, s4);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
