// tb_workload_batch: the scaled-up slice of twenty kernels, searching the
// same documents for three queries at once.
//
// Flash bandwidth, not matching, limits a single search. Several queries can
// share one pass over the data. Each data partition is read from flash once
// and offered to one kernel per query. This testbench builds spm_accelerator
// with NUM_KERNELS = 20, the size of the published scalability estimate.
// Twenty kernels do not divide into three queries, so it uses 18 of them:
// six partitions times three queries. Kernel k searches partition k / 3
// for query k % 3. Kernels 18 and 19 stay idle, and the testbench checks
// that they send nothing.
//
// The documents follow the document-search statistics: a 141,000-word
// vocabulary, 30 to 90 words per document, 60-word queries, and a few words
// shared with the queries. Each beat of a partition goes to its three
// kernels as a broadcast. A kernel that is ready takes the beat, and the beat
// is held for the others until each has taken it. The flash stream advances
// at the pace of the slowest of the three kernels.
//
// Every result record of every kernel is checked against the reference model
// (in dot-product mode). The testbench reports documents per cycle, both
// read from flash and scored (documents times queries). It gives the clock
// frequency needed for 27 million scored documents per second, which is the
// published estimate for this configuration. It checks that each partition
// takes no more cycles than the sum, over its documents, of the slowest
// kernel's merge steps, plus a small per-document cost.
module tb_workload_batch;
  import spm_pkg::*;
  import spm_tb_pkg::*;
  localparam int NK = 20;   // kernels built
  localparam int NQ = 3;    // queries searched in one pass
  localparam int NP = NK / NQ;  // partitions; kernels NP*NQ .. NK-1 are idle
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
  kvi_t qry [NQ][$];
  kvi_t qall [$];
  int unsigned pcyc [NP];
  int unsigned n_docs_total, n_items_total, n_pp_total, n_pass_total;

  spm_accelerator #(.NUM_KERNELS(NK)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
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
        if (expq[k].size() == 0) begin
          failures++;
          $display("kernel %0d: unexpected record %h", k, result[k]);
        end else begin
          e = expq[k].pop_front();
          if (result_rec_t'(result[k]) != e) begin
            failures++;
            $display("kernel %0d: record %h, expected %h", k, result[k], e);
          end
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

  // A sorted bag of n unique words from a vocabulary, up to nq of them taken
  // from the list q.
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

  // One partition: build its documents, expect each query's records from its
  // kernel, then stream the beats once to all NQ kernels.
  task automatic partition_run(int p, int ndocs, int unsigned thr);
    word_t words[$];
    logic [DATA_IN_W-1:0] beats[$];
    int unsigned npass [NQ], npp [NQ];
    int unsigned bound;
    int t0;
    bound = 0;
    for (int qi = 0; qi < NQ; qi++) begin npass[qi] = 0; npp[qi] = 0; end
    for (int dd = 0; dd < ndocs; dd++) begin
      kvi_t d[$];
      int unsigned pid, worst;
      pid = p << 24 | dd;
      bag(d, qall, $urandom_range(30, 90), $urandom_range(0, 4), 141000);
      words.push_back(pid_word(pid));
      foreach (d[i]) words.push_back(kv_word(d[i]));
      worst = 0;
      for (int qi = 0; qi < NQ; qi++) begin
        int unsigned sc, np, n2, c, sk;
        ref_score(qry[qi], d, sc, np, n2);
        ref_work(qry[qi], d, c, sk);
        if (1 + c + sk > worst) worst = 1 + c + sk;
        npp[qi] += np;
        if (sc >= thr) begin
          npass[qi]++;
          expq[p*NQ + qi].push_back('{REC_DOC, 24'(np), {1'b0, 31'(pid)}, sc, n2});
        end
      end
      bound += worst + PF + 3;
    end
    for (int qi = 0; qi < NQ; qi++) begin
      expq[p*NQ + qi].push_back('{REC_DONE, 24'd0, ndocs, npass[qi], npp[qi]});
      n_pp_total   += npp[qi];
      n_pass_total += npass[qi];
    end
    n_docs_total  += ndocs;
    n_items_total += words.size();
    for (int i = 0; i < words.size(); i += 16) begin
      logic [DATA_IN_W-1:0] b;
      b = '0;
      for (int j = 0; j < 16; j++) if (i + j < words.size()) b[j*32 +: 32] = words[i + j];
      beats.push_back(b);
    end
    for (int qi = 0; qi < NQ; qi++) send_cmd(p*NQ + qi, mk_cmd(CMD_START, 0, words.size()));
    t0 = $time;
    // broadcast each beat; hold it for every kernel that has not taken it yet
    foreach (beats[i]) begin
      bit pending [NQ];
      bit any;
      for (int qi = 0; qi < NQ; qi++) pending[qi] = 1;
      do begin
        for (int qi = 0; qi < NQ; qi++) begin
          data_in_valid[p*NQ + qi] = pending[qi];
          data_in[p*NQ + qi] = beats[i];
        end
        #1;
        for (int qi = 0; qi < NQ; qi++)
          if (pending[qi] && data_in_ready[p*NQ + qi]) pending[qi] = 0;
        @(negedge clk);
        any = 0;
        for (int qi = 0; qi < NQ; qi++) any |= pending[qi];
      end while (any);
      for (int qi = 0; qi < NQ; qi++) data_in_valid[p*NQ + qi] = 0;
    end
    for (int qi = 0; qi < NQ; qi++)
      while (expq[p*NQ + qi].size() != 0) @(negedge clk);
    pcyc[p] = ($time - t0) / 10;
    checks++;
    if (pcyc[p] > bound + 50) begin
      failures++;
      $display("partition %0d: %0d cycles, bound %0d", p, pcyc[p], bound);
    end
  endtask

  initial begin
    kvi_t none[$];
    int unsigned thr, mc;
    real spc, ipc;
    thr = 20000;
    n_docs_total = 0; n_items_total = 0; n_pp_total = 0; n_pass_total = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int qi = 0; qi < NQ; qi++) begin
      bag(qry[qi], none, 60, 0, 141000);
      foreach (qry[qi][i]) qall.push_back(qry[qi][i]);
    end
    // load each query into the kernel of every partition
    for (int k = 0; k < NP*NQ; k++) begin
      fork
        automatic int kk = k;
        begin
          foreach (qry[kk % NQ][i])
            send_cmd(kk, mk_cmd(CMD_QUERY_WR, i, kv_word(qry[kk % NQ][i])));
          send_cmd(kk, mk_cmd(CMD_SET_QLEN, 0, qry[kk % NQ].size()));
          send_cmd(kk, mk_cmd(CMD_SET_THRESH, 0, thr));
        end
      join_none
    end
    wait fork;
    for (int p = 0; p < NP; p++) begin
      fork
        automatic int pp = p;
        partition_run(pp, 250, thr);
      join_none
    end
    wait fork;
    repeat (20) @(negedge clk);
    for (int k = NP*NQ; k < NK; k++) begin
      checks++;
      if (busy[k] || expq[k].size() != 0) begin
        failures++;
        $display("idle kernel %0d is busy", k);
      end
    end
    mc = 0;
    for (int p = 0; p < NP; p++) if (pcyc[p] > mc) mc = pcyc[p];
    spc = real'(n_docs_total * NQ) / real'(mc);
    ipc = real'(n_items_total) / real'(mc);
    $display("batch of %0d queries on %0d kernels: %0d documents read once, %0d scored, %0d partial products, %0d passed",
             NQ, NP*NQ, n_docs_total, n_docs_total * NQ, n_pp_total, n_pass_total);
    $display("slowest partition %0d cycles: %.4f documents read and %.4f scored per cycle",
             mc, real'(n_docs_total) / real'(mc), spc);
    $display("27M scored documents/s needs %.1f MHz; flash read at %.3f items per cycle, %.1f MHz for 2 GB/s",
             27.0 / spc, ipc, 500.0 / ipc);
    checks++;
    if (n_pass_total == 0 || n_pp_total == 0) begin
      failures++;
      $display("no document matched or passed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
