// tb_spm_accelerator: the whole accelerator slice, at its default size
// (eight kernels, 2048-item query memories), end to end.
//
// Every kernel gets its own host model: it loads its own random query (one
// of them the full 2048 items, one of them empty), sets a threshold, starts
// a run and streams its own dataset of documents as 512-bit beats while the
// other kernels do the same, so several queries are searched at once. The
// results of every kernel are checked record by record against the
// reference model. Each kernel runs twice, the second time with a new query
// over new data. The testbench also counts how often each mechanism of the
// design occurred across all kernels and counts a failure for any that never
// did: query rewinds at document boundaries, mispredicted prefetches
// discarded by the epoch check, key matches, documents passed and dropped by
// the threshold filter in dot-product mode and in cosine mode (the second
// pass switches half of the kernels to cosine mode), document items skipped after the query ran out,
// stalls on dataIn and on resultsToMemory (backpressure), and end-of-run
// records.
module tb_spm_accelerator;
  import spm_pkg::*;
  import spm_tb_pkg::*;
  localparam int NK = 8;

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
  int n_rewind = 0, n_discard = 0, n_match = 0, n_pass = 0, n_drop = 0, n_skip = 0;
  int n_data_stall = 0, n_result_stall = 0, n_done = 0, n_cos_pass = 0, n_cos_drop = 0;
  bit cos_k [NK];
  bit rewind_k [NK], discard_k [NK], match_k [NK], passed_k [NK], dropped_k [NK], skip_k [NK];

  spm_accelerator dut (.*);

  always #5 clk = ~clk;

  // taps on each kernel's internal events
  for (genvar k = 0; k < NK; k++) begin : g_tap
    assign rewind_k[k]  = dut.g_kernel[k].u_kernel.u_cmp.rewind;
    assign cos_k[k]     = dut.g_kernel[k].u_kernel.cos_mode;
    assign discard_k[k] = dut.g_kernel[k].u_kernel.u_qmem.discard;
    assign match_k[k]   = dut.g_kernel[k].u_kernel.u_cmp.emit
                          && dut.g_kernel[k].u_kernel.u_cmp.ev_n.is_match;
    assign passed_k[k]  = dut.g_kernel[k].u_kernel.u_filt.passed;
    assign dropped_k[k] = dut.g_kernel[k].u_kernel.u_filt.take
                          && !dut.g_kernel[k].u_kernel.u_filt.pass;
    assign skip_k[k]    = dut.g_kernel[k].u_kernel.u_cmp.q_done
                          && dut.g_kernel[k].u_kernel.u_cmp.doc_ready
                          && !dut.g_kernel[k].u_kernel.u_cmp.rewind;
  end

  initial begin
    repeat (600000) @(posedge clk);
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

  // result collectors and event counters
  always begin
    @(negedge clk);
    for (int k = 0; k < NK; k++) result_ready[k] = ($urandom_range(0, 3) != 0);
    #2;
    for (int k = 0; k < NK; k++) begin
      if (rewind_k[k])  n_rewind++;
      if (discard_k[k]) n_discard++;
      if (match_k[k])   n_match++;
      if (passed_k[k])  n_pass++;
      if (dropped_k[k]) n_drop++;
      if (passed_k[k] && cos_k[k])  n_cos_pass++;
      if (dropped_k[k] && cos_k[k]) n_cos_drop++;
      if (skip_k[k])    n_skip++;
      if (data_in_valid[k] && !data_in_ready[k]) n_data_stall++;
      if (result_valid[k] && !result_ready[k])   n_result_stall++;
      if (rst_n && result_valid[k] && result_ready[k]) begin
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
          if (e.rtype == REC_DONE) n_done++;
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

  task automatic host(int k, int pass);
    kvi_t q[$];
    word_t words[$];
    logic [DATA_IN_W-1:0] beats[$];
    result_rec_t recs[$];
    int unsigned steps, nm, qn, thr;
    bit use_cos;
    logic [63:0] c;
    qn  = (k == 0 && pass == 0) ? 2048 : (k == 1 && pass == 1) ? 0 : $urandom_range(1, 150);
    thr = $urandom_range(0, 40000);
    gen_list(q, qn, (qn > 1000) ? 6 : 4, 0);
    foreach (q[i]) send_cmd(k, mk_cmd(CMD_QUERY_WR, i, kv_word(q[i])));
    send_cmd(k, mk_cmd(CMD_SET_QLEN, 0, qn));
    use_cos = (pass == 1) && k[0];
    c = cos_const(0.05 + 0.02 * k, qnorm2(q));
    if (use_cos) send_cmd(k, mk_cmd(CMD_SET_COS, c[63:32], c[31:0]));
    else         send_cmd(k, mk_cmd(CMD_SET_THRESH, 0, thr));
    build_run(q, $urandom_range(30, 80), (qn > 1000) ? 300 : 60, thr, use_cos, c,
              k << 24 | pass << 20, words, beats, recs, steps, nm);
    foreach (recs[i]) expq[k].push_back(recs[i]);
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
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      for (int k = 0; k < NK; k++) begin
        fork
          automatic int kk = k;
          automatic int pp = pass;
          host(kk, pp);
        join_none
      end
      wait fork;
    end
    repeat (5) @(negedge clk);
    for (int k = 0; k < NK; k++) begin
      checks++;
      if (busy[k]) begin
        failures++;
        $display("kernel %0d still busy", k);
      end
    end
    $display("rewinds %0d discards %0d matches %0d passed %0d dropped %0d skipped %0d",
             n_rewind, n_discard, n_match, n_pass, n_drop, n_skip);
    $display("dataIn stalls %0d result stalls %0d end-of-run records %0d",
             n_data_stall, n_result_stall, n_done);
    $display("cosine mode: passed %0d dropped %0d", n_cos_pass, n_cos_drop);
    checks += 11;
    if (n_cos_pass == 0)     begin failures++; $display("no document passed in cosine mode"); end
    if (n_cos_drop == 0)     begin failures++; $display("no document dropped in cosine mode"); end
    if (n_rewind == 0)       begin failures++; $display("no rewind happened"); end
    if (n_discard == 0)      begin failures++; $display("no prefetch was discarded"); end
    if (n_match == 0)        begin failures++; $display("no key matched"); end
    if (n_pass == 0)         begin failures++; $display("no document passed"); end
    if (n_drop == 0)         begin failures++; $display("no document was dropped"); end
    if (n_skip == 0)         begin failures++; $display("no item skipped after the query"); end
    if (n_data_stall == 0)   begin failures++; $display("dataIn never stalled"); end
    if (n_result_stall == 0) begin failures++; $display("resultsToMemory never stalled"); end
    if (n_done != 2 * NK)    begin failures++; $display("%0d end-of-run records", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
