// tb_line_buffer: streams numbered pixels through a 5-row line buffer of
// width 12 with random idle cycles and checks that col_out[r] equals the
// pixel (4 - r) rows above the incoming one.
module tb_line_buffer;
  localparam int R = 5, W = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0;
  logic [7:0] pix_in = 0;
  logic [R-1:0][7:0] col_out;
  int checks = 0, failures = 0;

  line_buffer #(.ROWS(R), .W(W), .DW(8)) dut (.clk, .rst_n, .en, .pix_in, .col_out);

  function automatic logic [7:0] val(int i);
    return 8'((i * 37 + 11) % 251);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < W * 20; i++) begin
      while ($urandom % 4 == 0) begin
        @(negedge clk); en = 0;
      end
      @(negedge clk);
      en = 1;
      pix_in = val(i);
      #1;
      for (int r = 0; r < R; r++) begin
        int j;
        j = i - (R - 1 - r) * W;
        if (j >= 0) begin
          checks++;
          if (col_out[r] != val(j)) begin
            failures++;
            $display("pixel %0d row %0d: %0d exp %0d", i, r, col_out[r], val(j));
          end
        end
      end
    end
    @(negedge clk) en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
