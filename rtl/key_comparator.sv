// key_comparator: sparse key matching between the query and the documents.
//
// Both the query vector and each document are lists of key/value items
// sorted by key, so their common keys (the nonzero partial products of the
// sparse dot product) are found by a merge: one pointer into the query
// memory, one into the document stream from flash. Each comparison advances
// exactly one of them: the document pointer when the document key is smaller
// or equal (equal keys also emit a match), the query pointer ("next pair")
// when the document key is larger. The document pointer only moves forward;
// when a pattern identifier arrives, the previous document is closed and the
// query pointer is rewound to item 0. After the query's last item has been
// passed, the rest of the document is skipped one item per cycle. This
// follows the published description; the order of pointer moves on equal
// keys and the event format are this design's choices.
//
// Interface: doc_* is the 32-bit item stream (see spm_pkg), doc_last marks
// the dataset's final item. q_* is the query memory's item stream, q_ready is
// "next pair", rewind is a one-cycle pulse. ev_* carries match_ev_t events to
// the distance accumulator through an output register: one event per
// document item consumed (is_item, with the document value, which the
// accumulator needs for the document's norm), flagged is_match with the
// query value when the key is common, and a doc_end event when a document
// closes (doc_end rides on the item event when the dataset's final item is a
// key/value item). Sending every document value, not only matches, is this
// design's addition for the cosine normalisation. A dataset is expected to
// begin with a pattern identifier; key/value items before the first one are
// dropped. cmp pulses once per key comparison. The rst_n in the assertions'
// disable clause makes verilator report rst_n as used both synchronously and
// asynchronously; the logic itself resets asynchronously only.
// Timing: one comparison, or one skipped item, per cycle when both streams
// are ready; the event leaves one cycle after the comparison.
module key_comparator
  import spm_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  // document items from flash
  input  logic      doc_valid,
  output logic      doc_ready,
  input  word_t     doc_word,
  input  logic      doc_last,
  // query memory
  input  logic      q_valid,
  output logic      q_ready,
  input  kv_t       q_kv,
  input  logic      q_last,
  input  logic      q_empty,
  output logic      rewind,
  // events to the distance accumulator
  output logic      ev_valid,
  input  logic      ev_ready,
  output match_ev_t ev,
  // activity
  output logic      cmp
);
  logic      doc_open, q_done, pend_end;
  pid_t      cur_pid;
  logic      slot_free, emit;
  match_ev_t ev_n;

  logic      doc_open_n, q_done_n, pend_end_n;
  pid_t      cur_pid_n;

  key_t      dkey;
  assign dkey      = word_key(doc_word);
  assign slot_free = !ev_valid || ev_ready;

  always_comb begin
    doc_ready  = 1'b0;
    q_ready    = 1'b0;
    rewind     = 1'b0;
    cmp        = 1'b0;
    emit       = 1'b0;
    ev_n       = '0;
    ev_n.pid   = cur_pid;
    doc_open_n = doc_open;
    q_done_n   = q_done;
    pend_end_n = pend_end;
    cur_pid_n  = cur_pid;

    if (pend_end) begin
      // dataset ended on a pattern identifier: close that empty document
      if (slot_free) begin
        emit         = 1'b1;
        ev_n.doc_end = 1'b1;
        ev_n.run_end = 1'b1;
        pend_end_n   = 1'b0;
        doc_open_n   = 1'b0;
      end
    end else if (doc_valid && is_pid(doc_word)) begin
      if (slot_free) begin
        doc_ready  = 1'b1;
        rewind     = 1'b1;
        cur_pid_n  = word_pid(doc_word);
        doc_open_n = 1'b1;
        q_done_n   = q_empty;
        if (doc_open) begin
          emit         = 1'b1;
          ev_n.doc_end = 1'b1;
          pend_end_n   = doc_last;
        end else if (doc_last) begin
          emit         = 1'b1;
          ev_n.pid     = word_pid(doc_word);
          ev_n.doc_end = 1'b1;
          ev_n.run_end = 1'b1;
          doc_open_n   = 1'b0;
        end
      end
    end else if (doc_valid && !doc_open) begin
      doc_ready = 1'b1;                      // item outside any document
    end else if (doc_valid && (q_done || q_valid)) begin
      // Document item against the query: compare keys, or skip once the
      // query is exhausted. Every consumed item sends its value on.
      if (!q_done && dkey > q_kv.key) begin
        cmp     = 1'b1;
        q_ready = 1'b1;                      // next pair
        if (q_last) q_done_n = 1'b1;
      end else if (slot_free) begin
        cmp           = !q_done;
        doc_ready     = 1'b1;
        emit          = 1'b1;
        ev_n.is_item  = 1'b1;
        ev_n.dval     = word_val(doc_word);
        if (!q_done && dkey == q_kv.key) begin
          ev_n.is_match = 1'b1;
          ev_n.qval     = q_kv.val;
        end
        if (doc_last) begin
          ev_n.doc_end = 1'b1;
          ev_n.run_end = 1'b1;
          doc_open_n   = 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      doc_open <= 1'b0;
      q_done   <= 1'b0;
      pend_end <= 1'b0;
      cur_pid  <= '0;
      ev_valid <= 1'b0;
      ev       <= '0;
    end else begin
      doc_open <= doc_open_n;
      q_done   <= q_done_n;
      pend_end <= pend_end_n;
      cur_pid  <= cur_pid_n;
      if (emit) begin
        ev_valid <= 1'b1;
        ev       <= ev_n;
      end else if (ev_ready) begin
        ev_valid <= 1'b0;
      end
    end
  end

  // An item is never taken from the query in a rewind cycle.
  assert property (@(posedge clk) disable iff (!rst_n) !(rewind && q_ready))
    else $error("key_comparator: next pair during rewind");
  // Events are held until accepted.
  assert property (@(posedge clk) disable iff (!rst_n)
                   ev_valid && !ev_ready |=> ev_valid && $stable(ev))
    else $error("key_comparator: event dropped under backpressure");

endmodule
