// tb_window_buffer: shifts numbered columns into a 3x4 window with random
// idle cycles and checks that win[r][c] holds column (newest - (3 - c)).
module tb_window_buffer;
  localparam int R = 3, C = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0;
  logic [R-1:0][7:0] col_in = '0;
  logic [R-1:0][C-1:0][7:0] win;
  int checks = 0, failures = 0;

  window_buffer #(.ROWS(R), .COLS(C), .DW(8)) dut (.clk, .rst_n, .en, .col_in, .win);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      en = ($urandom % 3 != 0);
      for (int r = 0; r < R; r++) col_in[r] = 8'(i * 8 + r);
      if (en) begin
        @(negedge clk);
        en = 0;
        for (int c = 0; c < C; c++) begin
          int j;
          j = i - (C - 1 - c);
          for (int r = 0; r < R; r++) begin
            if (j >= 0 && i >= C) begin
              checks++;
              if (win[r][c] != 8'(j * 8 + r)) begin
                failures++;
                $display("i %0d win[%0d][%0d]=%0d", i, r, c, win[r][c]);
              end
            end
          end
        end
      end else i--;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
