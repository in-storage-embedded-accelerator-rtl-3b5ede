// spm_kernel: one sparse pattern matching kernel with its accelerator ports.
//
// Dataflow: 512-bit beats from flash arrive on dataIn and are split into
// 32-bit items (pattern identifiers and key/value pairs). The key comparator
// merges each document's sorted keys against the sorted query held in the
// query memory, whose prefetch predictor keeps one query item per cycle
// coming across document boundaries. Matches go to the distance accumulator,
// which sums the partial products per document, and the threshold filter
// sends the documents that score high enough to the host on resultsToMemory.
// The host configures the kernel through the commandIn sideband: it writes
// the query into the query memory, sets the query length and either a
// dot-product threshold or a cosine threshold constant, and starts a run
// with the number of items to process. Each of the three
// ports has a queue, as in the published interface.
//
// The chain of blocks, the port widths (dataIn 512, commandIn 128,
// resultsToMemory 128) and the query memory size follow the published
// design. The command and result encodings (spm_pkg), the port queue depth
// and the rule that commands wait while a run is in progress are this
// design's own. The fourth published port, dataToStorage (512 bits), carries
// data the kernel writes back to flash; document search writes nothing back,
// so it is not built here.
//
// Timing: after START, one data item is examined per cycle while query and
// data keep up; a rewind costs a few cycles while mispredicted prefetches
// drain. busy stays high from START until the end-of-run record has been
// queued for the host.
module spm_kernel
  import spm_pkg::*;
#(
  parameter int unsigned QDEPTH     = 2048,
  parameter int unsigned PF_DEPTH   = 4,
  parameter int unsigned EPOCH_W    = 4,
  parameter int unsigned PORT_DEPTH = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // dataIn (from flash storage)
  input  logic                 data_in_valid,
  output logic                 data_in_ready,
  input  logic [DATA_IN_W-1:0] data_in,
  // commandIn (from host software)
  input  logic                 cmd_in_valid,
  output logic                 cmd_in_ready,
  input  logic [CMD_W-1:0]     cmd_in,
  // resultsToMemory (to host software)
  output logic                 result_valid,
  input  logic                 result_ready,
  output logic [RESULT_W-1:0]  result,
  output logic                 busy
);
  localparam int unsigned QAW = $clog2(QDEPTH);

  // ---------------- port queues ----------------
  logic                 dq_valid, dq_ready;
  logic [DATA_IN_W-1:0] dq_data;
  logic                 cq_valid, cq_ready;
  logic [CMD_W-1:0]     cq_data;
  logic                 rq_in_valid, rq_in_ready;
  result_rec_t          rq_in_data;

  sync_fifo #(.WIDTH(DATA_IN_W), .DEPTH(PORT_DEPTH)) u_data_q (
    .clk(clk), .rst_n(rst_n),
    .in_valid(data_in_valid), .in_ready(data_in_ready), .in_data(data_in),
    .out_valid(dq_valid), .out_ready(dq_ready), .out_data(dq_data), .count());

  sync_fifo #(.WIDTH(CMD_W), .DEPTH(PORT_DEPTH)) u_cmd_q (
    .clk(clk), .rst_n(rst_n),
    .in_valid(cmd_in_valid), .in_ready(cmd_in_ready), .in_data(cmd_in),
    .out_valid(cq_valid), .out_ready(cq_ready), .out_data(cq_data), .count());

  sync_fifo #(.WIDTH(RESULT_W), .DEPTH(PORT_DEPTH)) u_result_q (
    .clk(clk), .rst_n(rst_n),
    .in_valid(rq_in_valid), .in_ready(rq_in_ready), .in_data(rq_in_data),
    .out_valid(result_valid), .out_ready(result_ready), .out_data(result), .count());

  // ---------------- command decode ----------------
  cmd_t        cmd;
  logic        cmd_take, start;
  logic [QAW:0] qlen;
  score_t      threshold;
  logic        cos_mode;
  logic [63:0] cos_c;
  logic        q_wr;

  assign cmd      = cmd_t'(cq_data);
  assign cq_ready = !busy;
  assign cmd_take = cq_valid && cq_ready;
  assign start    = cmd_take && (cmd.op == CMD_START);
  assign q_wr     = cmd_take && (cmd.op == CMD_QUERY_WR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qlen      <= '0;
      threshold <= '0;
      cos_mode  <= 1'b0;
      cos_c     <= '0;
      busy      <= 1'b0;
    end else begin
      if (cmd_take && cmd.op == CMD_SET_QLEN)
        qlen <= (cmd.b > 32'(QDEPTH)) ? (QAW+1)'(QDEPTH) : cmd.b[QAW:0];
      if (cmd_take && cmd.op == CMD_SET_THRESH) begin
        threshold <= cmd.b;
        cos_mode  <= 1'b0;
      end
      if (cmd_take && cmd.op == CMD_SET_COS) begin
        cos_c    <= {cmd.a, cmd.b};
        cos_mode <= 1'b1;
      end
      if (start && cmd.b != '0)
        busy <= 1'b1;
      else if (rq_in_valid && rq_in_ready && rq_in_data.rtype == REC_DONE)
        busy <= 1'b0;
    end
  end

  // ---------------- datapath ----------------
  logic       w_valid, w_ready, w_last;
  word_t      w_word;

  word_unpacker u_unpack (
    .clk(clk), .rst_n(rst_n), .start(start), .nwords(cmd.b),
    .in_valid(dq_valid), .in_ready(dq_ready), .in_data(dq_data),
    .out_valid(w_valid), .out_ready(w_ready), .out_word(w_word), .out_last(w_last));

  logic       q_valid, q_ready, q_last, q_empty, rewind, discard;
  kv_t        q_kv;

  query_memory #(.DEPTH(QDEPTH), .PF_DEPTH(PF_DEPTH), .EPOCH_W(EPOCH_W)) u_qmem (
    .clk(clk), .rst_n(rst_n),
    .wr_en(q_wr), .wr_addr(cmd.a[QAW-1:0]), .wr_data(kv_t'(cmd.b)), .qlen(qlen),
    .rewind(rewind), .out_valid(q_valid), .out_ready(q_ready), .out_kv(q_kv),
    .out_last(q_last), .q_empty(q_empty), .discard(discard));

  logic       ev_valid, ev_ready, cmp;
  match_ev_t  ev;

  key_comparator u_cmp (
    .clk(clk), .rst_n(rst_n),
    .doc_valid(w_valid), .doc_ready(w_ready), .doc_word(w_word), .doc_last(w_last),
    .q_valid(q_valid), .q_ready(q_ready), .q_kv(q_kv), .q_last(q_last),
    .q_empty(q_empty), .rewind(rewind),
    .ev_valid(ev_valid), .ev_ready(ev_ready), .ev(ev), .cmp(cmp));

  logic       ds_valid, ds_ready;
  doc_score_t ds;

  distance_accumulator u_acc (
    .clk(clk), .rst_n(rst_n),
    .in_valid(ev_valid), .in_ready(ev_ready), .in_ev(ev),
    .out_valid(ds_valid), .out_ready(ds_ready), .out_score(ds));

  logic       passed;

  threshold_filter u_filt (
    .clk(clk), .rst_n(rst_n), .threshold(threshold), .cos_mode(cos_mode),
    .cos_c(cos_c), .clear(start),
    .in_valid(ds_valid), .in_ready(ds_ready), .in_score(ds),
    .out_valid(rq_in_valid), .out_ready(rq_in_ready), .out_rec(rq_in_data),
    .passed(passed));

endmodule
