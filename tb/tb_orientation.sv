// tb_orientation: feeds the 37-row columns of a random smoothed 6-bit image
// (64x50, with blobs so that centroids point in all directions) into the
// orientation module with random idle cycles, and compares the quadrant and
// sector of every window centre at least 18 pixels from the border with a
// direct 37x37 moment sum and tan comparison (tan from floating point, or
// the shift-add constants for 4 sectors per quadrant). Three instances run
// side by side: 16, 8 and 4 sectors per quadrant (64, 32 and 16 sectors).
module tb_orientation;
  import orb_pkg::*;
  import orb_ref_pkg::*;
  localparam int W = 64, H = 50, SPQ = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0, out_valid;
  logic [36:0][5:0] col_in = '0;
  tag_t tag_in = '0, tag_out;
  logic [1:0] quadrant;
  logic [3:0] sector;
  int checks = 0, failures = 0;
  img_t g;
  int quads[4] = '{0, 0, 0, 0};
  int sect_seen[16];

  orientation #(.W(W), .DW(6), .SPQ(SPQ)) dut (.*);

  logic v8, v4;
  tag_t t8, t4;
  logic [1:0] q8, q4;
  logic [2:0] s8;
  logic [1:0] s4;
  orientation #(.W(W), .DW(6), .SPQ(8)) dut8 (.clk, .rst_n, .en, .col_in, .tag_in,
    .out_valid(v8), .tag_out(t8), .quadrant(q8), .sector(s8));
  orientation #(.W(W), .DW(6), .SPQ(4)) dut4 (.clk, .rst_n, .en, .col_in, .tag_in,
    .out_valid(v4), .tag_out(t4), .quadrant(q4), .sector(s4));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid) begin
    int x, y, q, s;
    x = int'(tag_out.x); y = int'(tag_out.y);
    if (x >= 18 && x < W - 18 && y >= 18 && y < H - 18) begin
      orient(g, W, x, y, SPQ, q, s);
      checks++;
      if (int'(quadrant) != q || int'(sector) != s) begin
        failures++;
        $display("(%0d,%0d): q %0d s %0d exp q %0d s %0d", x, y, quadrant, sector, q, s);
      end
      quads[q]++;
      sect_seen[s]++;
      orient(g, W, x, y, 8, q, s);
      checks++;
      if (!v8 || t8 != tag_out || int'(q8) != q || int'(s8) != s) begin
        failures++;
        $display("32 sectors (%0d,%0d): q %0d s %0d exp q %0d s %0d", x, y, q8, s8, q, s);
      end
      orient(g, W, x, y, 4, q, s);
      checks++;
      if (!v4 || t4 != tag_out || int'(q4) != q || int'(s4) != s) begin
        failures++;
        $display("16 sectors (%0d,%0d): q %0d s %0d exp q %0d s %0d", x, y, q4, s4, q, s);
      end
    end
  end

  initial begin
    g = new[W * H];
    foreach (g[i]) g[i] = int'($urandom % 20);
    for (int n = 0; n < 60; n++) begin
      int cx, cy, sz;
      cx = $urandom % W; cy = $urandom % H; sz = 4 + $urandom % 10;
      for (int y = cy; y < cy + sz && y < H; y++)
        for (int x = cx; x < cx + sz && x < W; x++) g[y * W + x] = (n % 2) ? 40 + $urandom % 24 : 0;
    end
    foreach (sect_seen[i]) sect_seen[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < W * H + 8; i++) begin
      while ($urandom % 4 == 0) begin en <= 0; @(posedge clk); end
      en <= 1;
      for (int r = 0; r < 37; r++) begin
        int yy;
        yy = i / W - 36 + r;
        col_in[r] <= (yy >= 0 && i < W * H) ? 6'(g[yy * W + i % W]) : 6'd0;
      end
      tag_in <= '{valid: i < W * H, frame: 1'b0, y: YW'(i / W), x: XW'(i % W)};
      @(posedge clk);
    end
    en <= 0;
    repeat (3) @(posedge clk);
    checks++;
    if (quads[0] == 0 || quads[1] == 0 || quads[2] == 0 || quads[3] == 0) begin
      failures++;
      $display("quadrants %0d %0d %0d %0d", quads[0], quads[1], quads[2], quads[3]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
