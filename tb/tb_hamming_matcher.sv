// tb_hamming_matcher: self-checking test of the Hamming-distance matcher.
//
// Loads NREF random reference descriptors, then sends queries that are
// either copies of a reference with a random number of flipped bits (0..90)
// or fully random. A model in the testbench computes the nearest reference
// (lowest index on ties) and its distance; queries within TH must appear in
// the result buffer in order with the right index, distance and position,
// the others must raise st_nomatch. It also checks the per-query latency
// (result written and status pulse raised on the (ref_n + 1)-th clock edge
// after the query is accepted; sampled at the following falling edge this
// reads as ref_n + 2 in the testbench's cycle units), a reduced reference count, an empty reference set, and result
// buffer overflow (the host stops reading for a while; every match that
// finds the buffer full must raise st_res_drop and be missing from the
// output).
module tb_hamming_matcher;
  import orb_pkg::*;
  localparam int NREF = 16, TH = 50, RD = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic ref_we = 0, ref_n_we = 0;
  logic [3:0] ref_addr = '0;
  logic [255:0] ref_data = '0;
  logic [4:0] ref_n = '0;
  logic q_valid = 0, q_ready;
  desc_rec_t q_rec = '0;
  logic res_valid, res_ready = 1'b1;
  match_rec_t res_rec;
  logic st_match, st_nomatch, st_res_drop;

  hamming_matcher #(.NREF(NREF), .TH(TH), .RES_DEPTH(RD)) dut (.*);

  int checks = 0, failures = 0;
  logic [255:0] refs [NREF];
  match_rec_t exp_q[$];
  int n_match = 0, n_nomatch = 0, n_drop = 0, exp_nomatch = 0, exp_drop = 0;
  int nref_cur;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  function automatic logic [255:0] rnd256();
    logic [255:0] v;
    for (int i = 0; i < 8; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  // count status pulses and check results
  always @(posedge clk) if (rst_n) begin
    if (st_match) n_match++;
    if (st_nomatch) n_nomatch++;
    if (st_res_drop) n_drop++;
    if (res_valid && res_ready) begin
      match_rec_t e;
      if (exp_q.size() == 0) check(0, "unexpected result");
      else begin
        e = exp_q.pop_front();
        check(res_rec == e, $sformatf("result %h expected %h", res_rec, e));
      end
    end
  end

  // One query; returns after the matcher is idle again.
  task automatic query(logic [255:0] dsc, int qx, int qy, int lvl, bit hold_full);
    int best, bi, dd, t0, t1;
    match_rec_t e;
    best = 1000; bi = 0;
    for (int i = 0; i < nref_cur; i++) begin
      dd = $countones(dsc ^ refs[i]);
      if (dd < best) begin best = dd; bi = i; end
    end
    @(negedge clk);
    while (!q_ready) @(negedge clk);
    q_valid = 1; q_rec = '0; q_rec.desc = dsc; q_rec.x = 10'(qx); q_rec.y = 10'(qy); q_rec.level = 2'(lvl);
    @(posedge clk); t0 = $time / 10;
    @(negedge clk); q_valid = 0;
    while (!(st_match || st_nomatch || st_res_drop)) @(negedge clk);
    t1 = $time / 10;
    // status pulse is registered one cycle after the result write
    check(t1 - t0 == nref_cur + 2,
          $sformatf("latency %0d for ref_n %0d", t1 - t0, nref_cur));
    if (best <= TH) begin
      e.y = 10'(qy); e.x = 10'(qx); e.level = 2'(lvl); e.ref_idx = 8'(bi); e.hdist = 9'(best);
      if (st_res_drop) exp_drop++;
      else exp_q.push_back(e);
      check(!st_nomatch, "match reported as no match");
      check(hold_full ? 1'b1 : st_match, "expected st_match");
    end else begin
      exp_nomatch++;
      check(st_nomatch, $sformatf("expected no match, best %0d", best));
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NREF; i++) begin
      refs[i] = rnd256();
      @(negedge clk); ref_we = 1; ref_addr = 4'(i); ref_data = refs[i];
    end
    @(negedge clk); ref_we = 0; ref_n_we = 1; ref_n = 5'(NREF); nref_cur = NREF;
    @(negedge clk); ref_n_we = 0;
    // phase 1: host always ready
    for (int k = 0; k < 150; k++) begin
      logic [255:0] d;
      if (k % 4 == 3) d = rnd256();
      else begin
        d = refs[$urandom_range(NREF-1)];
        for (int f = $urandom_range(90); f > 0; f--) d[$urandom_range(255)] ^= 1'b1;
      end
      query(d, $urandom_range(639), $urandom_range(479), $urandom_range(3), 0);
    end
    // phase 2: host stops reading; exact copies overflow the buffer
    res_ready = 0;
    for (int k = 0; k < 8; k++) query(refs[k], k, k, 1, 1);
    res_ready = 1;
    repeat (10) @(negedge clk);
    // phase 3: fewer references, including the empty set
    @(negedge clk); ref_n_we = 1; ref_n = 5'd5; nref_cur = 5;
    @(negedge clk); ref_n_we = 0;
    for (int k = 0; k < 20; k++) query(refs[$urandom_range(NREF-1)], k, 2*k, 2, 0);
    @(negedge clk); ref_n_we = 1; ref_n = 5'd0; nref_cur = 0;
    @(negedge clk); ref_n_we = 0;
    query(refs[0], 1, 1, 0, 0);
    repeat (10) @(negedge clk);
    check(exp_q.size() == 0, $sformatf("%0d results missing", exp_q.size()));
    check(n_nomatch == exp_nomatch, $sformatf("nomatch %0d expected %0d", n_nomatch, exp_nomatch));
    check(n_drop == exp_drop && exp_drop == 8 - RD, $sformatf("drops %0d expected %0d", n_drop, exp_drop));
    check(n_match > 40 && exp_nomatch > 20, $sformatf("coverage: %0d matches %0d no-matches", n_match, exp_nomatch));
    $display("matches=%0d nomatch=%0d drops=%0d", n_match, n_nomatch, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
