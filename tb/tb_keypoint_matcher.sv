// tb_keypoint_matcher: random orientation tags and FIFO heads, biased
// toward equal and neighbouring coordinates and both frame parities;
// compares match, stale and pop with the raster-order rule.
module tb_keypoint_matcher;
  import orb_pkg::*;
  logic o_valid, fifo_empty, match, stale, pop;
  tag_t o_tag;
  kp_t fifo_head;
  int checks = 0, failures = 0, nm = 0, ns = 0;

  keypoint_matcher dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 5000; t++) begin
      bit em, es, same;
      int hx, hy, ox, oy;
      o_valid = ($urandom % 8 != 0);
      fifo_empty = ($urandom % 8 == 0);
      ox = $urandom % 6; oy = $urandom % 4;
      hx = ox + int'($urandom % 3) - 1; hy = oy + int'($urandom % 3) - 1;
      if (hx < 0) hx = 0;
      if (hy < 0) hy = 0;
      o_tag = '{valid: ($urandom % 8 != 0), frame: 1'($urandom), y: YW'(oy), x: XW'(ox)};
      fifo_head = '{frame: ($urandom % 4 == 0) ? !o_tag.frame : o_tag.frame, y: YW'(hy), x: XW'(hx), score: 12'($urandom)};
      #1;
      same = o_valid && o_tag.valid && !fifo_empty && fifo_head.frame == o_tag.frame;
      em = same && hx == ox && hy == oy;
      es = same && (hy < oy || (hy == oy && hx < ox));
      checks++;
      if (match != em || stale != es || pop != (em || es)) begin
        failures++;
        $display("t %0d: match %0d/%0d stale %0d/%0d", t, match, em, stale, es);
      end
      nm += em; ns += es;
    end
    checks++;
    if (nm == 0 || ns == 0) begin failures++; $display("no match or no stale case"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
