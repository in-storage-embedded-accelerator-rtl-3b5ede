// threshold_filter: keeps only the documents worth reporting to the host.
//
// Two modes. In dot-product mode (cos_mode low) a document passes when its
// score is at or above the threshold. In cosine mode it passes when its
// cosine similarity with the query is at or above t, tested as
// score^2 * 2^COS_FRAC >= cos_c * norm2 with cos_c = t^2 |A|^2 2^COS_FRAC
// supplied by the host, so no divider or square root is needed. A document
// that passes becomes a REC_DOC result record (pattern identifier, score,
// |B|^2, partial products), from which the host can form the exact cosine;
// the others are dropped. The filter also counts documents seen, documents
// passed and partial products over a run, and after the run's last document
// it sends one REC_DONE record with these totals so that the host knows the
// run has finished. The published design names this block and says that
// documents with high scores are reported; the two compares, the record
// format and the end-of-run record are this design's choices.
// clear resets the totals (pulsed when a run starts).
//
// Interface: valid/ready in (doc_score_t) and out (result_rec_t, 128 bits),
// output registered. Timing: one document per cycle; the last document of a
// run takes two cycles when it passes, since it yields two records.
module threshold_filter
  import spm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  score_t      threshold,
  input  logic        cos_mode,
  input  logic [63:0] cos_c,
  input  logic        clear,
  input  logic        in_valid,
  output logic        in_ready,
  input  doc_score_t  in_score,
  output logic        out_valid,
  input  logic        out_ready,
  output result_rec_t out_rec,
  output logic        passed   // pulse per document that passed
);
  logic [31:0] n_docs, n_pass, n_pp;
  logic        pend_done;
  logic        slot_free, take, pass;
  logic [31:0] n_docs_n, n_pass_n, n_pp_n;
  logic [95:0] cos_lhs, cos_rhs;

  assign slot_free = !out_valid || out_ready;
  assign in_ready  = slot_free && !pend_done;
  assign take      = in_valid && in_ready;
  assign cos_lhs   = {16'd0, 64'(in_score.score) * 64'(in_score.score), COS_FRAC'(0)};
  assign cos_rhs   = 96'(cos_c) * 96'(in_score.norm2);
  assign pass      = cos_mode ? (cos_lhs >= cos_rhs) : (in_score.score >= threshold);
  assign passed    = take && pass;
  assign n_docs_n  = n_docs + 1;
  assign n_pass_n  = n_pass + 32'(pass);
  assign n_pp_n    = n_pp + 32'(in_score.npp);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_docs    <= '0;
      n_pass    <= '0;
      n_pp      <= '0;
      pend_done <= 1'b0;
      out_valid <= 1'b0;
      out_rec   <= '0;
    end else if (clear) begin
      n_docs    <= '0;
      n_pass    <= '0;
      n_pp      <= '0;
      pend_done <= 1'b0;
    end else begin
      if (slot_free) out_valid <= 1'b0;
      if (pend_done && slot_free) begin
        out_valid     <= 1'b1;
        out_rec.rtype <= REC_DONE;
        out_rec.npp   <= '0;
        out_rec.a     <= n_docs;
        out_rec.b     <= n_pass;
        out_rec.c     <= n_pp;
        pend_done     <= 1'b0;
      end else if (take) begin
        n_docs <= n_docs_n;
        n_pass <= n_pass_n;
        n_pp   <= n_pp_n;
        if (pass) begin
          out_valid     <= 1'b1;
          out_rec.rtype <= REC_DOC;
          out_rec.npp   <= 24'(in_score.npp);
          out_rec.a     <= {1'b0, in_score.pid};
          out_rec.b     <= in_score.score;
          out_rec.c     <= in_score.norm2;
          pend_done     <= in_score.run_end;
        end else if (in_score.run_end) begin
          out_valid     <= 1'b1;
          out_rec.rtype <= REC_DONE;
          out_rec.npp   <= '0;
          out_rec.a     <= n_docs_n;
          out_rec.b     <= n_pass_n;
          out_rec.c     <= n_pp_n;
        end
      end
    end
  end

endmodule
