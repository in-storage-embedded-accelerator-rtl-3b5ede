// tb_threshold_filter: random document scores and norms around a threshold,
// with random gaps and backpressure, over several runs, each run in
// dot-product or cosine mode. Expected: a REC_DOC record for exactly the
// documents that pass (score >= threshold, or score^2 2^16 >= C |B|^2),
// in order, and
// after each run's last document one REC_DONE record with the number of
// documents, of documents passed and of partial products in that run.
module tb_threshold_filter;
  import spm_pkg::*;
  import spm_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  score_t threshold = '0;
  logic cos_mode = 0;
  logic [63:0] cos_c = '0;
  logic clear = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, passed;
  doc_score_t in_score = '0;
  result_rec_t out_rec;
  int checks = 0, failures = 0;
  result_rec_t expq[$];
  int n_pass = 0, n_drop = 0, n_cos_pass = 0, n_cos_drop = 0;

  threshold_filter dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always begin
    @(negedge clk);
    out_ready = ($urandom_range(0, 3) != 0);
    #2;
    if (rst_n && out_valid && out_ready) begin
      result_rec_t e;
      checks++;
      e = expq.pop_front();
      if (out_rec != e) begin
        failures++;
        $display("record %h, expected %h", out_rec, e);
      end
    end
  end

  task automatic send(doc_score_t s);
    in_valid = 1;
    in_score = s;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    in_valid = 0;
    if ($urandom_range(0, 2) == 0) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      int nd, np, npp;
      nd = $urandom_range(1, 30); np = 0; npp = 0;
      threshold = $urandom_range(100, 1000);
      cos_mode  = r[0];
      cos_c     = 64'($urandom_range(0, 3000000));
      clear = 1;
      @(negedge clk);
      clear = 0;
      for (int d = 0; d < nd; d++) begin
        doc_score_t s;
        s.pid     = 31'($urandom);
        s.score   = (d % 7 == 3) ? threshold : $urandom_range(0, 1100);
        s.npp     = 16'($urandom_range(0, 60));
        s.norm2   = $urandom_range(1000, 100000);
        if (cos_mode && d % 7 == 3)      // exactly on the cosine threshold
          s.norm2 = 32'((64'(s.score) * 64'(s.score) * 65536) / (cos_c == 0 ? 1 : cos_c));
        s.run_end = (d == nd - 1);
        npp += s.npp;
        if (ref_pass(s.score, s.norm2, cos_mode, threshold, cos_c)) begin
          np++;
          if (cos_mode) n_cos_pass++; else n_pass++;
          expq.push_back('{REC_DOC, 24'(s.npp), {1'b0, s.pid}, s.score, s.norm2});
        end else if (cos_mode) n_cos_drop++;
        else n_drop++;
        if (s.run_end)
          expq.push_back('{REC_DONE, 24'd0, 32'(nd), 32'(np), 32'(npp)});
        send(s);
      end
      for (int w = 0; w < 200 && expq.size() != 0; w++) @(negedge clk);
      checks++;
      if (expq.size() != 0) begin
        failures++;
        $display("run %0d: %0d records never came", r, expq.size());
        expq.delete();
      end
    end
    checks++;
    if (n_pass == 0 || n_drop == 0 || n_cos_pass == 0 || n_cos_drop == 0) failures++;
    $display("dot mode: passed %0d dropped %0d; cosine mode: passed %0d dropped %0d",
             n_pass, n_drop, n_cos_pass, n_cos_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
