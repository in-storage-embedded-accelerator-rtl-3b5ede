// tb_distance_accumulator: random item/match/end event streams with random
// input gaps and output backpressure. The expected score of each document is
// the sum of qval*dval over its match events (including one riding on the
// document-end event) and its norm the sum of dval^2 over its item events,
// worked out in the testbench as the events are made; the partial product
// count and the run-end flag are checked too. With no
// stalls, one event must be accepted per cycle.
module tb_distance_accumulator;
  import spm_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  match_ev_t in_ev = '0;
  doc_score_t out_score;
  int checks = 0, failures = 0;
  doc_score_t expq[$];
  bit stalls_on = 1;

  distance_accumulator dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output side: random ready at the falling edge, sample 1 ns later
  always begin
    @(negedge clk);
    out_ready = !stalls_on || ($urandom_range(0, 3) != 0);
    #2;
    if (rst_n && out_valid && out_ready) begin
      doc_score_t e;
      checks++;
      e = expq.pop_front();
      if (out_score != e) begin
        failures++;
        $display("doc %0d: score %0d norm2 %0d npp %0d end %0b, expected doc %0d score %0d norm2 %0d npp %0d end %0b",
                 out_score.pid, out_score.score, out_score.norm2, out_score.npp, out_score.run_end,
                 e.pid, e.score, e.norm2, e.npp, e.run_end);
      end
    end
  end

  // send one event, waiting for in_ready
  task automatic send(match_ev_t e);
    in_valid = 1;
    in_ev    = e;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    in_valid = 0;
    if (stalls_on && $urandom_range(0, 3) == 0) @(negedge clk);
  endtask

  task automatic document(int unsigned pid, int nm, bit last, bit end_on_match);
    doc_score_t exp;
    exp = '0;
    exp.pid = 31'(pid);
    for (int i = 0; i < nm; i++) begin
      match_ev_t e;
      e = '0;
      e.pid      = 31'(pid);
      e.is_item  = 1;
      e.is_match = (i == nm - 1) || ($urandom_range(0, 2) == 0);
      e.qval     = 8'($urandom);
      e.dval     = 8'($urandom);
      if (e.is_match) begin
        exp.score += SCORE_W'(e.qval) * SCORE_W'(e.dval);
        exp.npp   += 1;
      end
      exp.norm2 += NORM_W'(e.dval) * NORM_W'(e.dval);
      if (end_on_match && i == nm - 1) begin
        e.doc_end = 1;
        e.run_end = last;
        exp.run_end = last;
        expq.push_back(exp);
      end
      send(e);
    end
    if (!(end_on_match && nm > 0)) begin
      match_ev_t e;
      e = '0;
      e.pid     = 31'(pid);
      e.doc_end = 1;
      e.run_end = last;
      exp.run_end = last;
      expq.push_back(exp);
      send(e);
    end
  endtask

  initial begin
    int t0, t1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int d = 0; d < 400; d++)
      document($urandom, $urandom_range(0, 20), (d % 50) == 49, $urandom_range(0, 1));
    // big document: 2048 products of 255*255 must not overflow
    begin
      doc_score_t exp;
      match_ev_t e;
      exp = '0; exp.pid = 5; exp.npp = 2048; exp.score = 2048 * 255 * 255; exp.run_end = 1;
      exp.norm2 = 2048 * 255 * 255;
      expq.push_back(exp);
      e = '0; e.pid = 5; e.is_item = 1; e.is_match = 1; e.qval = 255; e.dval = 255;
      stalls_on = 0;
      for (int i = 0; i < 2047; i++) send(e);
      e.doc_end = 1; e.run_end = 1;
      send(e);
    end
    // rate: 100 events back to back
    @(negedge clk);
    t0 = $time;
    document(77, 99, 1, 0);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != 100) begin
      failures++;
      $display("100 events took %0d cycles", (t1 - t0) / 10);
    end
    repeat (5) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin
      failures++;
      $display("%0d documents never came out", expq.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
