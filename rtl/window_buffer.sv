// window_buffer: ROWS x COLS array of shift registers giving parallel access
// to a pixel window (paper Fig. 10, right half).
//
// Every enabled step shifts all columns one place toward column 0 and loads
// col_in (normally a line buffer's column output) into column COLS-1, so
// win[r][COLS-1] is the newest column and win[r][0] the oldest. Row index r
// follows the line buffer: r = ROWS-1 is the newest image row. The window is
// registered: it reflects the column presented on the previous enabled
// step. Reset clears it to zero.
module window_buffer #(
  parameter int unsigned ROWS = 3,
  parameter int unsigned COLS = 3,
  parameter int unsigned DW   = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic [ROWS-1:0][DW-1:0] col_in,
  output logic [ROWS-1:0][COLS-1:0][DW-1:0] win
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) win <= '0;
    else if (en) begin
      for (int r = 0; r < ROWS; r++) begin
        for (int c = 0; c < COLS - 1; c++) win[r][c] <= win[r][c+1];
        win[r][COLS-1] <= col_in[r];
      end
    end
  end
endmodule
