// tb_key_comparator: checks the merge of document keys against query keys.
//
// The query side is a simple model of the query memory: an array, a
// pointer advanced by "next pair" and reset by rewind, with random stalls.
// Documents of random length (including empty ones and ones whose keys run
// past the end of the query) are streamed with random gaps, and the event
// output sees random backpressure. Expected events are worked out from the
// key lists: for each document, one item event per document item in key
// order, carrying the document value and, for a key common with the query,
// the match flag and the query value; then the document end, with the run
// end on the final document.
// The number of key comparisons must equal what a one-pointer-per-step merge
// needs, and with no stalls each comparison or skip must take one cycle.
module tb_key_comparator;
  import spm_pkg::*;
  import spm_tb_pkg::*;

  typedef struct {
    bit          is_end;
    int unsigned pid, qv, dv;
    bit          run_end;
    bit          is_match;
  } exp_t;

  logic clk = 0, rst_n = 0;
  logic doc_valid = 0, doc_ready, doc_last = 0;
  word_t doc_word = '0;
  logic q_valid, q_ready, q_last, q_empty, rewind;
  kv_t  q_kv;
  logic ev_valid, ev_ready = 0, cmp;
  match_ev_t ev;

  int checks = 0, failures = 0;
  kvi_t q[$];
  int   qptr = 0;
  bit   q_stall = 0;
  bit   stalls_on = 1;
  exp_t expq[$];
  int unsigned exp_cmps = 0, n_cmp = 0, n_rewind = 0;
  word_t data[$];

  key_comparator dut (.*);

  always #5 clk = ~clk;

  // Query memory model, document driver and event checker share one
  // process: inputs are set at the falling edge, outputs are sampled 1 ns
  // later, and state moves on at the next falling edge.
  int  di = 0;
  bit  gaps = 1;
  bit  running = 0;
  bit  pend_rew, pend_q, pend_d;
  assign q_valid = !q_stall && qptr < q.size();
  assign q_kv    = (qptr < q.size()) ? kv_t'(kv_word(q[qptr])) : '0;
  assign q_last  = (qptr == q.size() - 1);
  assign q_empty = (q.size() == 0);

  always begin
    @(negedge clk);
    if (pend_rew) qptr = 0;
    else if (pend_q) qptr++;
    if (pend_d) di++;
    q_stall   = stalls_on && ($urandom_range(0, 3) == 0);
    ev_ready  = !stalls_on || ($urandom_range(0, 4) != 0);
    doc_valid = running && (di < data.size()) && !(gaps && $urandom_range(0, 3) == 0);
    doc_word  = (di < data.size()) ? data[di] : '0;
    doc_last  = (di == data.size() - 1);
    #1;
    pend_rew = rewind;
    pend_q   = q_valid && q_ready;
    pend_d   = doc_valid && doc_ready;
    if (rewind) n_rewind++;
    if (cmp) n_cmp++;
    if (rst_n && ev_valid && ev_ready) begin
      if (ev.is_item) begin
        exp_t e;
        checks++;
        e = expq.pop_front();
        if (e.is_end || ev.pid != 31'(e.pid) || ev.is_match != e.is_match
            || ev.dval != 8'(e.dv) || (e.is_match && ev.qval != 8'(e.qv))) begin
          failures++;
          $display("item event pid %0d match %0b q %0d d %0d, expected end=%0b pid %0d match %0b q %0d d %0d",
                   ev.pid, ev.is_match, ev.qval, ev.dval, e.is_end, e.pid, e.is_match, e.qv, e.dv);
        end
      end
      if (ev.is_match && !ev.is_item) begin
        failures++;
        $display("match event without a document item");
      end
      if (ev.doc_end) begin
        exp_t e;
        checks++;
        e = expq.pop_front();
        if (!e.is_end || ev.pid != 31'(e.pid) || ev.run_end != e.run_end) begin
          failures++;
          $display("end event pid %0d run_end %0b, expected end=%0b pid %0d run_end %0b",
                   ev.pid, ev.run_end, e.is_end, e.pid, e.run_end);
        end
      end
      if (!ev.is_item && !ev.doc_end) begin
        failures++;
        $display("empty event");
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Build a dataset of ndocs documents and its expected events.
  task automatic build(int ndocs, int qn);
    int unsigned base_pid;
    gen_list(q, qn, 4, 0);
    data.delete();
    base_pid = $urandom_range(0, 1000000);
    for (int dd = 0; dd < ndocs; dd++) begin
      kvi_t d[$];
      int unsigned c, s;
      int len;
      len = ($urandom_range(0, 7) == 0) ? 0 : $urandom_range(1, 30);
      gen_list(d, len, 6, $urandom_range(0, 40));
      data.push_back(pid_word(base_pid + dd));
      foreach (d[i]) data.push_back(kv_word(d[i]));
      foreach (d[i]) begin
        exp_t e;
        e.is_end = 0; e.pid = base_pid + dd; e.qv = 0; e.dv = d[i].val; e.run_end = 0;
        e.is_match = 0;
        foreach (q[j])
          if (q[j].key == d[i].key) begin
            e.is_match = 1;
            e.qv = q[j].val;
          end
        expq.push_back(e);
      end
      begin
        exp_t e;
        e.is_end = 1; e.pid = base_pid + dd; e.qv = 0; e.dv = 0; e.run_end = (dd == ndocs - 1);
        e.is_match = 0;
        expq.push_back(e);
      end
      ref_work(q, d, c, s);
      exp_cmps += c;
    end
  endtask

  // Hand the dataset to the driver and wait until it has all been taken.
  task automatic stream(bit with_gaps);
    gaps = with_gaps;
    @(negedge clk);
    di = 0;
    pend_d = 0;
    running = 1;
    do @(negedge clk); while (di < data.size());
    running = 0;
  endtask

  initial begin
    int t0, t1, n_items;
    #1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random runs with stalls everywhere
    for (int r = 0; r < 30; r++) begin
      build($urandom_range(1, 12), (r == 5) ? 0 : $urandom_range(1, 25));
      stream(1);
      repeat (20) @(posedge clk);
      checks++;
      if (expq.size() != 0) begin
        failures++;
        $display("run %0d: %0d expected events never came", r, expq.size());
        expq.delete();
      end
    end
    checks++;
    if (n_cmp != exp_cmps) begin
      failures++;
      $display("comparisons %0d, expected %0d", n_cmp, exp_cmps);
    end
    // a run whose last item is a pattern identifier (empty final document)
    gen_list(q, 5, 3, 0);
    data.delete();
    data.push_back(pid_word(7));
    data.push_back(kv_word(q[2]));
    data.push_back(pid_word(8));
    expq.push_back('{0, 7, q[2].val, q[2].val, 0, 1});
    expq.push_back('{1, 7, 0, 0, 0, 0});
    expq.push_back('{1, 8, 0, 0, 1, 0});
    stream(0);
    repeat (10) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; expq.delete(); end
    // rate: no stalls anywhere, one document, every step one cycle
    stalls_on = 0;
    repeat (3) @(posedge clk);
    begin
      kvi_t d[$];
      int unsigned c, s;
      gen_list(q, 40, 3, 0);
      gen_list(d, 60, 3, 0);
      data.delete();
      data.push_back(pid_word(99));
      foreach (d[i]) data.push_back(kv_word(d[i]));
      ref_work(q, d, c, s);
      expq.delete();
      foreach (d[i]) begin
        exp_t e;
        e = '{0, 99, 0, d[i].val, 0, 0};
        foreach (q[j]) if (q[j].key == d[i].key) begin e.is_match = 1; e.qv = q[j].val; end
        expq.push_back(e);
      end
      expq.push_back('{1, 99, 0, 0, 1, 0});
      t0 = $time;
      stream(0);
      t1 = $time;
      checks++;
      $display("rate: %0d cycles for %0d comparisons and %0d skips", (t1 - t0) / 10, c, s);
      // one cycle for the identifier, one per comparison or skip; the
      // first query item arrives with the rewind in this model
      if ((t1 - t0) / 10 > 1 + c + s + 3) begin
        failures++;
        $display("took %0d cycles for %0d comparisons and %0d skips", (t1 - t0) / 10, c, s);
      end
      repeat (5) @(posedge clk);
      checks++;
      if (expq.size() != 0) begin failures++; expq.delete(); end
    end
    checks++;
    if (n_rewind == 0) failures++;
    $display("comparisons %0d rewinds %0d", n_cmp, n_rewind);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
