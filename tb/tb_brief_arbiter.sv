// tb_brief_arbiter: every combination of match and the ready vector of four
// BRIEF modules; start must be one-hot on the lowest ready module when a
// match is present, zero otherwise, and drop must be set for a match with no
// module ready.
module tb_brief_arbiter;
  localparam int N = 4;
  logic match, drop;
  logic [N-1:0] ready, start;
  int checks = 0, failures = 0;

  brief_arbiter #(.N(N)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 2; m++)
      for (int r = 0; r < (1 << N); r++) begin
        logic [N-1:0] es;
        match = 1'(m); ready = N'(r);
        #1;
        es = '0;
        if (m != 0)
          for (int i = 0; i < N; i++) if (r[i] && es == 0) es[i] = 1'b1;
        checks++;
        if (start != es || drop != (m != 0 && r == 0)) begin
          failures++;
          $display("match %0d ready %b: start %b drop %0d", m, ready, start, drop);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
