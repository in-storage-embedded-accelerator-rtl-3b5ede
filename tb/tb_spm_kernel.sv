// tb_spm_kernel: one kernel end to end through its three ports.
//
// A host model loads a random sorted query and a threshold over commandIn,
// starts a run and streams the dataset as 512-bit beats on dataIn, with
// random gaps; resultsToMemory sees random backpressure. Every result record
// is compared with the reference model (dot products by direct lookup,
// threshold compare, end-of-run totals). Runs vary the query length,
// including an empty query and a full 2048-item one, and the threshold, and
// alternate between dot-product and cosine thresholds; in cosine mode the
// cosine of each reported document, worked out in floating point from the
// record, must reach the threshold t. A
// final run with no stalls checks the rate: one merge step per cycle plus a
// bounded cost per document for the rewind.
module tb_spm_kernel;
  import spm_pkg::*;
  import spm_tb_pkg::*;
  localparam int PF = 4;

  logic clk = 0, rst_n = 0;
  logic data_in_valid = 0, data_in_ready;
  logic [DATA_IN_W-1:0] data_in = '0;
  logic cmd_in_valid = 0, cmd_in_ready;
  logic [CMD_W-1:0] cmd_in = '0;
  logic result_valid, result_ready = 0, busy;
  logic [RESULT_W-1:0] result;

  int checks = 0, failures = 0;
  bit stalls_on = 1;
  kvi_t q[$];
  word_t words[$];
  logic [DATA_IN_W-1:0] beats[$];
  result_rec_t expq[$];
  int n_done = 0;
  bit cur_cos = 0;
  real cur_t = 0.0;
  longint unsigned cur_qn2 = 0;
  int n_cos_rep = 0;

  spm_kernel dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result collector
  always begin
    @(negedge clk);
    result_ready = !stalls_on || ($urandom_range(0, 3) != 0);
    #2;
    if (rst_n && result_valid && result_ready) begin
      result_rec_t e;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("unexpected record %h", result);
      end else begin
        e = expq.pop_front();
        if (result_rec_t'(result) != e) begin
          failures++;
          $display("record %h, expected %h", result, e);
        end
        if (e.rtype == REC_DONE) n_done++;
        if (e.rtype == REC_DOC && cur_cos) begin
          real cosv;
          result_rec_t rr;
          rr = result_rec_t'(result);
          cosv = real'(rr.b) / $sqrt(real'(cur_qn2) * real'(rr.c));
          n_cos_rep++;
          checks++;
          if (cosv < cur_t * (1.0 - 1e-6)) begin
            failures++;
            $display("reported cosine %f below threshold %f", cosv, cur_t);
          end
        end
      end
    end
  end

  task automatic send_cmd(logic [CMD_W-1:0] c);
    cmd_in_valid = 1;
    cmd_in = c;
    #1;
    while (!cmd_in_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cmd_in_valid = 0;
  endtask

  task automatic send_beats();
    foreach (beats[i]) begin
      data_in_valid = 1;
      data_in = beats[i];
      #1;
      while (!data_in_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      data_in_valid = 0;
      if (stalls_on && $urandom_range(0, 2) == 0) @(negedge clk);
    end
  endtask

  task automatic load_query(int n, int maxgap);
    gen_list(q, n, maxgap, 0);
    foreach (q[i]) send_cmd(mk_cmd(CMD_QUERY_WR, i, kv_word(q[i])));
    send_cmd(mk_cmd(CMD_SET_QLEN, 0, n));
  endtask

  task automatic run(int ndocs, int maxlen, int unsigned thr, bit use_cos,
                     output int unsigned steps, output int cycles);
    result_rec_t recs[$];
    int unsigned nm;
    int t0;
    logic [63:0] c;
    cur_t   = 0.05 + 0.25 * real'($urandom_range(0, 100)) / 100.0;
    cur_qn2 = qnorm2(q);
    c = cos_const(cur_t, cur_qn2);
    build_run(q, ndocs, maxlen, thr, use_cos, c, $urandom_range(0, 1 << 20), words, beats, recs,
              steps, nm);
    foreach (recs[i]) expq.push_back(recs[i]);
    if (use_cos) send_cmd(mk_cmd(CMD_SET_COS, c[63:32], c[31:0]));
    else         send_cmd(mk_cmd(CMD_SET_THRESH, 0, thr));
    cur_cos = use_cos;
    t0 = $time;
    send_cmd(mk_cmd(CMD_START, 0, words.size()));
    send_beats();
    while (expq.size() != 0 && ($time - t0) < 2000000) @(negedge clk);
    cycles = ($time - t0) / 10;
    checks++;
    if (expq.size() != 0 || busy) begin
      failures++;
      $display("run did not finish: %0d records missing, busy %0b", expq.size(), busy);
      expq.delete();
    end
  endtask

  initial begin
    int unsigned steps;
    int cycles;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 12; r++) begin
      load_query((r == 3) ? 0 : $urandom_range(1, 60), 8);
      run($urandom_range(1, 25), 40, $urandom_range(0, 60000), r[0], steps, cycles);
    end
    // full query memory
    load_query(2048, 6);
    run(20, 200, 30000, 1, steps, cycles);
    // rate with no stalls
    stalls_on = 0;
    load_query(100, 6);
    run(60, 60, 20000, 0, steps, cycles);
    checks++;
    $display("rate run: %0d merge steps in %0d cycles", steps, cycles);
    if (cycles > steps + 60 * (PF + 3) + 30) begin
      failures++;
      $display("rate run too slow");
    end
    checks++;
    if (n_done != 14 || n_cos_rep == 0) failures++;
    $display("documents reported in cosine mode: %0d", n_cos_rep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
