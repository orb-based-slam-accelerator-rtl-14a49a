// tb_sync_fifo: random pushes and pops against a queue model; checks data
// order, empty/full flags, count, and that writes when full are ignored.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0, empty, full;
  logic [7:0] wr_data = 0, rd_data;
  logic [3:0] count;
  int checks = 0, failures = 0;
  int q[$];

  sync_fifo #(.WIDTH(8), .DEPTH(8)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nfull = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == 8) || count != q.size()) begin
        failures++;
        $display("flags: empty %0d full %0d count %0d model %0d", empty, full, count, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if (rd_data != 8'(q[0])) begin failures++; $display("data %0d exp %0d", rd_data, q[0]); end
      end
      wr_en   = (i < 1500) ? ($urandom % 3 != 0) : ($urandom % 3 == 0);
      rd_en   = (i < 1500) ? ($urandom % 3 == 0) : ($urandom % 3 != 0);
      wr_data = 8'($urandom);
      nfull  += full;
      @(posedge clk);
    end
    checks++;
    if (nfull == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model update at the clock edge, using the values set at the negedge
  always @(posedge clk) if (rst_n) begin
    bit r, w;
    r = rd_en && q.size() > 0;
    w = wr_en && q.size() < 8;
    if (r) void'(q.pop_front());
    if (w) q.push_back(int'(wr_data));
  end
endmodule
