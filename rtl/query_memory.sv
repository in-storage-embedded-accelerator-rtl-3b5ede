// query_memory: a kernel's query memory with its prefetch predictor.
//
// The query vector sits in a block RAM as key/value items sorted by key. The
// key comparator walks it with a query pointer that moves forward one item
// per "next pair" and goes back to item 0 ("rewind") whenever a new document
// starts. Because the block RAM has read latency, the prefetcher does not
// wait to learn whether a rewind is coming: it predicts that none is and
// keeps reading ahead from a fetch offset, queuing the values it gets back.
// Each read request also queues the epoch it was issued in. A rewind resets
// the fetch offset to 0 and increments the epoch; any queued value whose
// epoch differs from the current one was a misprediction and is discarded
// instead of being offered to the comparator. This structure (fetch offset
// reset to 0, epoch +1 on rewind, epoch queue, prefetched-value queue, an
// epoch equality test that chooses use or discard) is the published one.
//
// This design's own choices: the read at offset 0 is issued in the rewind
// cycle itself, tagged with the new epoch; the queues are PF_DEPTH deep and
// reads are issued only while the epoch queue has room, so the value queue
// cannot overflow; the queue head is tested against the epoch register, so
// an item still offered in the rewind cycle is not to be taken (the
// comparator never takes one then). EPOCH_W must exceed log2(PF_DEPTH+3) so
// that a stale entry cannot alias: an entry is discarded within PF_DEPTH+2
// cycles and there is at most one rewind per cycle.
//
// Interface: host writes (wr_*) go straight to the block RAM; qlen is the
// number of valid items. Output: valid/ready stream of items (out_ready is
// the comparator's "next pair"), out_last marks item qlen-1. q_empty is high
// when qlen is 0. discard pulses for each mispredicted item dropped.
// Timing: with no rewind the stream delivers one item per cycle; an item
// reaches the output two cycles after its read is issued. The rst_n in the
// assertions' disable clause makes verilator report rst_n as used both
// synchronously and asynchronously; the logic resets asynchronously only.
module query_memory
  import spm_pkg::*;
#(
  parameter int unsigned DEPTH    = 2048,
  parameter int unsigned PF_DEPTH = 4,
  parameter int unsigned EPOCH_W  = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host side (command sideband)
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  kv_t                      wr_data,
  input  logic [$clog2(DEPTH):0]   qlen,
  // comparator side
  input  logic                     rewind,
  output logic                     out_valid,
  input  logic                     out_ready,
  output kv_t                      out_kv,
  output logic                     out_last,
  output logic                     q_empty,
  output logic                     discard
);
  localparam int unsigned AW  = $clog2(DEPTH);
  localparam int unsigned PAW = $clog2(PF_DEPTH);

  logic [AW:0]        fetch_off, eff_off;
  logic [EPOCH_W-1:0] epoch, eff_epoch;
  logic               issue;

  // epoch queue
  logic               ef_in_ready, ef_out_valid;
  logic [EPOCH_W-1:0] ef_out_data;
  logic [PAW:0]       ef_count;
  // prefetched-value queue
  logic               vf_in_ready, vf_out_valid;
  logic [32:0]        vf_out_data;
  logic [PAW:0]       vf_count;

  logic               rd_valid_q, rd_last_q;
  kv_t                rd_data;
  logic               head_valid, use_head, pop;

  assign q_empty   = (qlen == '0);
  assign eff_off   = rewind ? '0 : fetch_off;
  assign eff_epoch = rewind ? epoch + 1'b1 : epoch;
  assign issue     = (eff_off < qlen) && ef_in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fetch_off  <= '0;
      epoch      <= '0;
      rd_valid_q <= 1'b0;
      rd_last_q  <= 1'b0;
    end else begin
      fetch_off  <= eff_off + (AW+1)'(issue);
      epoch      <= eff_epoch;
      rd_valid_q <= issue;
      rd_last_q  <= (eff_off == qlen - 1'b1);
    end
  end

  query_bram #(.DEPTH(DEPTH), .WIDTH(32)) u_bram (
    .clk     (clk),
    .wr_en   (wr_en),
    .wr_addr (wr_addr),
    .wr_data (wr_data),
    .rd_en   (issue),
    .rd_addr (eff_off[AW-1:0]),
    .rd_data (rd_data)
  );

  sync_fifo #(.WIDTH(EPOCH_W), .DEPTH(PF_DEPTH)) u_epoch_q (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (issue),
    .in_ready  (ef_in_ready),
    .in_data   (eff_epoch),
    .out_valid (ef_out_valid),
    .out_ready (pop),
    .out_data  (ef_out_data),
    .count     (ef_count)
  );

  sync_fifo #(.WIDTH(33), .DEPTH(PF_DEPTH)) u_value_q (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (rd_valid_q),
    .in_ready  (vf_in_ready),
    .in_data   ({rd_last_q, rd_data}),
    .out_valid (vf_out_valid),
    .out_ready (pop),
    .out_data  (vf_out_data),
    .count     (vf_count)
  );

  // Use / discard decision at the queue heads.
  assign head_valid = ef_out_valid && vf_out_valid;
  assign use_head   = head_valid && (ef_out_data == epoch);
  assign discard    = head_valid && (ef_out_data != epoch);
  assign out_valid  = use_head;
  assign out_kv     = vf_out_data[31:0];
  assign out_last   = vf_out_data[32];
  assign pop        = discard || (use_head && out_ready);

  // The value queue lags the epoch queue and never holds more entries.
  assert property (@(posedge clk) disable iff (!rst_n) rd_valid_q |-> vf_in_ready)
    else $error("query_memory: prefetched-value queue overflow");
  assert property (@(posedge clk) disable iff (!rst_n) vf_count <= ef_count)
    else $error("query_memory: value queue ahead of epoch queue");

endmodule
