// gaussian_filter: 7x7 binomial smoothing of a pixel stream (paper
// Sec. 4.4, Fig. 12).
//
// The kernel is the outer product of the binomial row 1 6 15 20 15 6 1,
// divided by 4096, exactly as printed in the paper; all products have
// constant multiplicands, so no multipliers are needed. A 7-row line buffer
// and a 7x7 window hold the neighbourhood; one registered stage forms the
// rounded weighted sum. The output pixel, of the same width DW as the input,
// belongs to the window centre, whose coordinate leaves on tag_out; both
// lag the input pixel by two enabled steps. Border pixels (centre within 3
// of an edge) see pixels of the neighbouring rows or of the previous frame
// and are not meaningful; the pipeline only uses pixels far from the
// border. In this design the input is the 6-bit quantised pixel (paper
// Sec. 5.2).
module gaussian_filter
  import orb_pkg::*;
#(
  parameter int unsigned W  = 640,
  parameter int unsigned DW = 6
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic [DW-1:0] pix,
  input  tag_t          tag_in,
  output logic [DW-1:0] pix_out,
  output tag_t          tag_out
);
  localparam int B [7] = '{1, 6, 15, 20, 15, 6, 1};

  logic [6:0][DW-1:0]       col7;
  logic [6:0][6:0][DW-1:0]  win7;
  tag_t                     tag7;
  logic [DW+11:0]           acc;

  line_buffer #(.ROWS(7), .W(W), .DW(DW)) u_lb7 (
    .clk, .rst_n, .en, .pix_in(pix), .col_out(col7)
  );
  window_buffer #(.ROWS(7), .COLS(7), .DW(DW)) u_win7 (
    .clk, .rst_n, .en, .col_in(col7), .win(win7)
  );

  always_comb begin
    acc = (DW+12)'(2048);
    for (int r = 0; r < 7; r++)
      for (int c = 0; c < 7; c++)
        acc = acc + (DW+12)'(B[r] * B[c]) * (DW+12)'(win7[r][c]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag7 <= '0; pix_out <= '0; tag_out <= '0;
    end else if (en) begin
      tag7    <= center_of(tag_in, 3, 3, W);
      pix_out <= DW'(acc >> 12);
      tag_out <= tag7;
    end
  end
endmodule
