// line_buffer: delays a pixel stream by whole image rows so that a column
// of ROWS vertically adjacent pixels is available at once (paper Fig. 10).
//
// The ROWS-1 stored rows are kept in one circular array of W words; each
// word holds one image column of the stored rows. On every enabled step the
// word at the pointer is read, output together with the incoming pixel as
// col_out, and written back shifted by one row with the incoming pixel at
// the bottom. col_out[ROWS-1] is the incoming pixel (newest row) and
// col_out[0] the pixel ROWS-1 rows above it. The output is combinational
// from the pointer and the input; the array update happens at the clock
// edge where en is high. The paper allows BRAM or LUT shift registers; this
// array with one read-modify-write per step maps to either. The pointer is
// a free-running counter modulo W, so each row must consist of exactly W
// enabled steps for the rows to line up.
module line_buffer #(
  parameter int unsigned ROWS = 3,
  parameter int unsigned W    = 640,
  parameter int unsigned DW   = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic [DW-1:0]         pix_in,
  output logic [ROWS-1:0][DW-1:0] col_out
);
  localparam int unsigned AW = $clog2(W);

  logic [ROWS-2:0][DW-1:0] mem [W];
  logic [AW-1:0]           ptr;
  logic [ROWS-2:0][DW-1:0] rd;

  assign rd = mem[ptr];

  always_comb begin
    col_out[ROWS-1] = pix_in;
    for (int r = 0; r < ROWS - 1; r++) col_out[r] = rd[r];
  end

  always_ff @(posedge clk) begin
    if (en) begin
      for (int r = 0; r < ROWS - 2; r++) mem[ptr][r] <= rd[r+1];
      mem[ptr][ROWS-2] <= pix_in;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  ptr <= '0;
    else if (en) ptr <= (ptr == AW'(W - 1)) ? '0 : ptr + 1'b1;
  end

endmodule
