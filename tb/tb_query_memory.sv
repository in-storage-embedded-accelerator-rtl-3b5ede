// tb_query_memory: checks the query memory's prefetch predictor.
//
// A random sorted query is written through the host port. A consumer model
// then takes items with random "next pair" pauses and issues random rewinds
// (never taking an item in a rewind cycle, as the key comparator does). A
// reference pointer, reset to 0 by each rewind and advanced by each item
// taken, says which item must appear next; every delivered item and its
// last flag are checked against it, and nothing may be delivered past the
// last item. Mispredicted prefetches must be discarded at least once. A
// final streaming phase checks that a full query of QLEN items streams out
// at one item per cycle (QLEN + 2 cycles after a rewind, at most
// QLEN + PF_DEPTH + 2 with stale entries to drain).
module tb_query_memory;
  import spm_pkg::*;
  import spm_tb_pkg::*;
  localparam int DEPTH = 2048;
  localparam int PF    = 4;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [10:0] wr_addr = 0;
  kv_t  wr_data = '0;
  logic [11:0] qlen = 0;
  logic rewind = 0, out_ready = 0;
  logic out_valid, out_last, q_empty, discard;
  kv_t  out_kv;
  int checks = 0, failures = 0;
  kvi_t q[$];
  int   ptr;
  int   n_disc = 0, n_taken = 0, n_rew = 0;

  query_memory dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (discard) n_disc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_query(int n);
    gen_list(q, n, 5, 0);
    foreach (q[i]) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 11'(i); wr_data = kv_t'(kv_word(q[i]));
    end
    @(negedge clk);
    wr_en = 0;
    qlen = 12'(n);
  endtask

  // one cycle of the consumer model, evaluated at the negative edge
  task automatic step(bit do_rewind, bit want);
    rewind    = do_rewind;
    out_ready = !do_rewind && want;
    #1;
    if (out_valid && out_ready) begin
      checks++;
      if (ptr >= q.size()) begin
        failures++;
        $display("item delivered past the end of the query");
      end else if (out_kv.key != 23'(q[ptr].key) || out_kv.val != 8'(q[ptr].val)
                   || out_last != (ptr == q.size() - 1)) begin
        failures++;
        $display("item %0d: got key %0d val %0d last %0b, expected key %0d val %0d",
                 ptr, out_kv.key, out_kv.val, out_last, q[ptr].key, q[ptr].val);
      end
      ptr++;
      n_taken++;
    end
    if (do_rewind) begin
      ptr = 0;
      n_rew++;
    end
    @(negedge clk);
  endtask

  initial begin
    int t0, t1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_query(40);
    checks++;
    if (q_empty) failures++;
    step(1, 0);
    for (int c = 0; c < 20000; c++)
      step($urandom_range(0, 19) == 0, $urandom_range(0, 3) != 0);

    // streaming rate after a rewind with a full prefetch queue
    load_query(300);
    step(1, 0);
    repeat (20) step(0, 0);           // let the prefetch queue fill
    step(1, 0);
    t0 = $time;
    while (ptr < q.size()) step(0, 1);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 > q.size() + PF + 2) begin
      failures++;
      $display("streaming took %0d cycles for %0d items", (t1 - t0) / 10, q.size());
    end
    // nothing more until the next rewind
    repeat (10) begin
      checks++;
      if (out_valid) failures++;
      step(0, 1);
    end
    checks++;
    if (n_disc == 0) begin
      failures++;
      $display("no mispredicted prefetch was ever discarded");
    end
    $display("items %0d rewinds %0d discards %0d", n_taken, n_rew, n_disc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
