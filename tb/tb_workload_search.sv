// tb_workload_search: the accelerator slice on the two kinds of search the
// design is meant for, at their real vocabulary sizes and sparsity, to
// measure throughput and check every result.
//
//   phase 0, document search: a 141,000-word vocabulary, documents of 30 to
//     90 prominent words (60 on average), a 60-word query document, and on
//     average about 1.3 words per document shared with the query (11 million
//     partial products over 8.2 million documents in the measured corpus).
//   phase 1, protein search: bags of 3-mers over the 20 amino acids
//     (8,000 possible words), reference proteins and query of about 300
//     distinct 3-mers.
//
// All eight kernels run at once, each with its own query and its own slice
// of the documents. Every result record is checked against the reference
// model. The testbench reports, per phase, the documents processed per
// clock cycle by the slice and the clock frequency that rate implies for the
// 10.35 million documents per second of the published prototype, the data
// items per cycle and the clock needed to keep up with 2 GB/s of flash, and
// checks
// that each kernel needs no more than one cycle per merge step plus a small
// per-document cost.
module tb_workload_search;
  import spm_pkg::*;
  import spm_tb_pkg::*;
  localparam int NK = 8;
  localparam int PF = 4;

  logic clk = 0, rst_n = 0;
  logic                 data_in_valid [NK];
  logic                 data_in_ready [NK];
  logic [DATA_IN_W-1:0] data_in       [NK];
  logic                 cmd_in_valid  [NK];
  logic                 cmd_in_ready  [NK];
  logic [CMD_W-1:0]     cmd_in        [NK];
  logic                 result_valid  [NK];
  logic                 result_ready  [NK];
  logic [RESULT_W-1:0]  result        [NK];
  logic                 busy          [NK];

  int checks = 0, failures = 0;
  result_rec_t expq [NK][$];
  int unsigned kstep [NK];
  int          kcyc  [NK];
  int unsigned n_docs_total, n_pp_total, n_items_total;

  spm_accelerator dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < NK; k++) begin
      data_in_valid[k] = 0; data_in[k] = '0;
      cmd_in_valid[k] = 0; cmd_in[k] = '0;
      result_ready[k] = 0;
    end
  end

  always begin
    @(negedge clk);
    for (int k = 0; k < NK; k++) result_ready[k] = 1;
    #2;
    for (int k = 0; k < NK; k++)
      if (rst_n && result_valid[k]) begin
        result_rec_t e;
        checks++;
        e = expq[k].pop_front();
        if (result_rec_t'(result[k]) != e) begin
          failures++;
          $display("kernel %0d: record %h, expected %h", k, result[k], e);
        end
      end
  end

  task automatic send_cmd(int k, logic [CMD_W-1:0] c);
    cmd_in_valid[k] = 1;
    cmd_in[k] = c;
    #1;
    while (!cmd_in_ready[k]) begin @(negedge clk); #1; end
    @(negedge clk);
    cmd_in_valid[k] = 0;
  endtask

  // A sorted bag of n unique words from a vocabulary, nq of them taken
  // from the query.
  function automatic void bag(ref kvi_t l[$], ref kvi_t q[$], input int n, input int nq,
                              input int unsigned vocab);
    bit used [int unsigned];
    int unsigned keys[$];
    l.delete();
    for (int i = 0; i < nq && q.size() > 0; i++) begin
      int unsigned k;
      k = q[$urandom_range(0, q.size() - 1)].key;
      if (!used.exists(k)) begin used[k] = 1; keys.push_back(k); end
    end
    while (keys.size() < n) begin
      int unsigned k;
      k = $urandom_range(0, vocab - 1);
      if (!used.exists(k)) begin used[k] = 1; keys.push_back(k); end
    end
    keys.sort();
    foreach (keys[i]) l.push_back('{keys[i], $urandom_range(1, 255)});
  endfunction

  task automatic kernel_run(int k, int unsigned vocab, int qn, int dmin, int dmax,
                            int maxshared, int ndocs, int unsigned thr);
    kvi_t q[$], none[$];
    word_t words[$];
    logic [DATA_IN_W-1:0] beats[$];
    int unsigned steps, npass, npp;
    int t0;
    bag(q, none, qn, 0, vocab);
    foreach (q[i]) send_cmd(k, mk_cmd(CMD_QUERY_WR, i, kv_word(q[i])));
    send_cmd(k, mk_cmd(CMD_SET_QLEN, 0, qn));
    send_cmd(k, mk_cmd(CMD_SET_THRESH, 0, thr));
    steps = 0; npass = 0; npp = 0;
    for (int dd = 0; dd < ndocs; dd++) begin
      kvi_t d[$];
      int unsigned sc, np, n2, c, sk;
      bag(d, q, $urandom_range(dmin, dmax), $urandom_range(0, maxshared), vocab);
      words.push_back(pid_word(k << 24 | dd));
      foreach (d[i]) words.push_back(kv_word(d[i]));
      ref_score(q, d, sc, np, n2);
      ref_work(q, d, c, sk);
      steps += 1 + c + sk;
      npp += np;
      if (sc >= thr) begin
        npass++;
        expq[k].push_back('{REC_DOC, 24'(np), {1'b0, 31'(k << 24 | dd)}, sc, n2});
      end
    end
    expq[k].push_back('{REC_DONE, 24'd0, ndocs, npass, npp});
    n_docs_total += ndocs;
    n_pp_total   += npp;
    n_items_total += words.size();
    for (int i = 0; i < words.size(); i += 16) begin
      logic [DATA_IN_W-1:0] b;
      b = '0;
      for (int j = 0; j < 16; j++) if (i + j < words.size()) b[j*32 +: 32] = words[i + j];
      beats.push_back(b);
    end
    t0 = $time;
    send_cmd(k, mk_cmd(CMD_START, 0, words.size()));
    foreach (beats[i]) begin
      data_in_valid[k] = 1;
      data_in[k] = beats[i];
      #1;
      while (!data_in_ready[k]) begin @(negedge clk); #1; end
      @(negedge clk);
      data_in_valid[k] = 0;
    end
    while (expq[k].size() != 0) @(negedge clk);
    kstep[k] = steps;
    kcyc[k]  = ($time - t0) / 10;
    checks++;
    if (kcyc[k] > steps + ndocs * (PF + 3) + 50) begin
      failures++;
      $display("kernel %0d: %0d cycles for %0d merge steps", k, kcyc[k], steps);
    end
  endtask

  task automatic phase(string name, int unsigned vocab, int qn, int dmin, int dmax,
                       int maxshared, int ndocs, int unsigned thr);
    int t0, cyc;
    real dpc;
    n_docs_total = 0;
    n_pp_total = 0;
    n_items_total = 0;
    t0 = $time;
    for (int k = 0; k < NK; k++) begin
      fork
        automatic int kk = k;
        kernel_run(kk, vocab, qn, dmin, dmax, maxshared, ndocs, thr);
      join_none
    end
    wait fork;
    cyc = ($time - t0) / 10;
    dpc = real'(n_docs_total) / real'(kcyc[0] > 0 ? kcyc[0] : 1);
    begin
      int unsigned st; int mc;
      st = 0; mc = 0;
      for (int k = 0; k < NK; k++) begin
        st += kstep[k];
        if (kcyc[k] > mc) mc = kcyc[k];
      end
      dpc = real'(n_docs_total) / real'(mc);
      $display("%s: %0d documents, %0d partial products, %0d merge steps, slowest kernel %0d cycles",
               name, n_docs_total, n_pp_total, st, mc);
      $display("%s: %.4f documents per cycle; 10.35M documents/s needs %.1f MHz",
               name, dpc, 10.35 / dpc);
      $display("%s: %.3f 32-bit items per cycle; 2 GB/s (500M items/s) needs %.1f MHz",
               name, real'(n_items_total) / real'(mc), 500.0 / (real'(n_items_total) / real'(mc)));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    phase("document search", 141000, 60, 30, 90, 3, 300, 20000);
    phase("protein 3-mer search", 8000, 300, 250, 350, 40, 25, 200000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
