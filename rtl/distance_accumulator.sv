// distance_accumulator: per-document sparse dot product.
//
// For every match event from the key comparator it forms the partial product
// PP_i = A_i * B_i of the query value and the document value and adds it to
// a running sum (the numerator of the cosine similarity); it also counts the
// partial products. For every document item it adds B_i^2 to a second sum,
// the square of the document's norm, which the cosine needs in its
// denominator. When a document closes (doc_end) it sends the document's
// pattern identifier, both sums and the count to the threshold filter, and
// clears them for the next document. The published design forms the partial
// products and accumulates the score per document here; how it normalises
// is not published. Here no square root or divider is built: the norm term
// is carried along and the threshold filter tests the cosine with
// multiplications only (see spm_pkg). The query's own norm is a constant of
// the query and is folded into the host's threshold constant.
//
// Interface: valid/ready in (match_ev_t) and out (doc_score_t), output
// registered. A doc_end event is accepted only when the output register is
// free; plain match events are always accepted.
// Timing: one event per cycle; a document's score is available one cycle
// after its doc_end event is accepted. The 32-bit dot product cannot overflow
// for a 2048-item query of 8-bit values (2048 * 255 * 255 < 2^32); the 32-bit
// norm sum holds documents of up to 66,000 items.
module distance_accumulator
  import spm_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  match_ev_t  in_ev,
  output logic       out_valid,
  input  logic       out_ready,
  output doc_score_t out_score
);
  score_t acc, sum;
  norm_t  nacc, nsum;
  cnt_t   npp, npp_sum;
  logic   take;

  assign in_ready = !in_ev.doc_end || !out_valid || out_ready;
  assign take     = in_valid && in_ready;
  assign sum      = in_ev.is_match ? acc + SCORE_W'(in_ev.qval * in_ev.dval) : acc;
  assign nsum     = in_ev.is_item ? nacc + NORM_W'(in_ev.dval * in_ev.dval) : nacc;
  assign npp_sum  = in_ev.is_match ? npp + 1'b1 : npp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      nacc      <= '0;
      npp       <= '0;
      out_valid <= 1'b0;
      out_score <= '0;
    end else begin
      if (take && in_ev.doc_end) begin
        out_valid         <= 1'b1;
        out_score.pid     <= in_ev.pid;
        out_score.score   <= sum;
        out_score.norm2   <= nsum;
        out_score.npp     <= npp_sum;
        out_score.run_end <= in_ev.run_end;
        acc               <= '0;
        nacc              <= '0;
        npp               <= '0;
      end else begin
        if (out_ready) out_valid <= 1'b0;
        if (take) begin
          acc  <= sum;
          nacc <= nsum;
          npp  <= npp_sum;
        end
      end
    end
  end

endmodule
