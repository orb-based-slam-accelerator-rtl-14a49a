// image_scaler: down-scales a pixel stream by 5/6 in both directions with
// bilinear interpolation, producing the next level of the image pyramid
// (paper Sec. 4.2, scale factor 1.2 = 6/5).
//
// A one-row line buffer and a 2x2 window hold the pixels (x,y), (x+1,y),
// (x,y+1) and (x+1,y+1) when input pixel (x+1,y+1) arrives. With
// x6 = x mod 6 and y6 = y mod 6 the output is
//   ( (5-x6)(5-y6) P(x,y) + x6(5-y6) P(x+1,y) + (5-x6)y6 P(x,y+1)
//     + x6 y6 P(x+1,y+1) + 12 ) / 25,
// the paper's weight matrix. No output is made when x6 or y6 equals 5, so 5
// of 6 pixels per row and 5 of 6 rows produce an output; a W x H input gives
// scaled_len(W) x scaled_len(H) outputs (640x480 -> 533x400). The paper gives
// the weights and the validity rule; the assignment of each weight to a
// corner of the 2x2 window, the rounding and the row/column counters are
// this design's choices.
//
// Timing: in_valid marks one input pixel per cycle at most; out_valid is a
// one-cycle pulse in the cycle after the input pixel that completed the 2x2
// window, with out_pix valid in that cycle.
module image_scaler #(
  parameter int unsigned W = 640,
  parameter int unsigned H = 480
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [7:0] in_pix,
  output logic       out_valid,
  output logic [7:0] out_pix
);
  localparam int unsigned XB = $clog2(W);
  localparam int unsigned YB = $clog2(H);

  logic [1:0][7:0]        col;
  logic [1:0][1:0][7:0]   win;
  logic [XB-1:0]          xc;
  logic [YB-1:0]          yc;
  logic [2:0]             x6c, y6c;     // (xc mod 6), (yc mod 6) of the input pixel
  logic [2:0]             x6, y6;       // of the output's top-left source pixel
  logic [2:0]             px6, py6;     // previous column / row values

  line_buffer #(.ROWS(2), .W(W), .DW(8)) u_lb (
    .clk, .rst_n, .en(in_valid), .pix_in(in_pix), .col_out(col)
  );
  window_buffer #(.ROWS(2), .COLS(2), .DW(8)) u_win (
    .clk, .rst_n, .en(in_valid), .col_in(col), .win(win)
  );

  assign px6 = (x6c == 3'd0) ? 3'd5 : x6c - 3'd1;
  assign py6 = (y6c == 3'd0) ? 3'd5 : y6c - 3'd1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xc <= '0; yc <= '0; x6c <= '0; y6c <= '0;
      out_valid <= 1'b0; x6 <= '0; y6 <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        out_valid <= (xc != 0) && (yc != 0) && (px6 != 3'd5) && (py6 != 3'd5);
        x6 <= px6;
        y6 <= py6;
        if (xc == XB'(W - 1)) begin
          xc  <= '0;
          x6c <= '0;
          if (yc == YB'(H - 1)) begin
            yc  <= '0;
            y6c <= '0;
          end else begin
            yc  <= yc + 1'b1;
            y6c <= (y6c == 3'd5) ? 3'd0 : y6c + 3'd1;
          end
        end else begin
          xc  <= xc + 1'b1;
          x6c <= (x6c == 3'd5) ? 3'd0 : x6c + 3'd1;
        end
      end
    end
  end

  // win[r][c]: r=1 is row y+1, c=1 is column x+1.
  logic [15:0] acc;
  logic [2:0]  wx0, wy0;   // 5 - x6, 5 - y6
  always_comb begin
    wx0 = 3'd5 - x6;
    wy0 = 3'd5 - y6;
    acc = 16'(wx0) * 16'(wy0)  * 16'(win[0][0])
        + 16'(x6)  * 16'(wy0) * 16'(win[0][1])
        + 16'(wx0) * 16'(y6)  * 16'(win[1][0])
        + 16'(x6)  * 16'(y6)  * 16'(win[1][1])
        + 16'd12;
    out_pix = 8'(acc / 16'd25);
  end

endmodule
