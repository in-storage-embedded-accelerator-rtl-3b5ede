// word_unpacker: splits the 512-bit dataIn beats into 32-bit data items.
//
// A run is armed by start with the number of 32-bit items it holds. Each
// beat carries 512/32 = 16 items, item 0 in bits 31:0; the unpacker hands
// them out one per cycle and marks the run's final item with out_last. Items
// of the final beat past the run's length are dropped. The next beat is
// taken in the same cycle as the last item of the current one, so a steady
// input stream yields one item every cycle. Beat size and item size follow
// the published port width and data format; the item order within a beat and
// the length-based end of run are this design's choices.
module word_unpacker
  import spm_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [31:0]          nwords,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [DATA_IN_W-1:0] in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output word_t                out_word,
  output logic                 out_last
);
  localparam int unsigned N  = DATA_IN_W / WORD_W;
  localparam int unsigned IW = $clog2(N);

  logic [DATA_IN_W-1:0] beat;
  logic                 beat_valid;
  logic [IW-1:0]        idx;
  logic [31:0]          words_left, left_after;
  logic                 wtake, beat_done;

  assign out_valid  = beat_valid && (words_left != '0);
  assign out_last   = (words_left == 32'd1);
  assign out_word   = beat[idx*WORD_W +: WORD_W];
  assign wtake      = out_valid && out_ready;
  assign beat_done  = wtake && (idx == IW'(N-1) || out_last);
  assign left_after = words_left - 32'(wtake);
  assign in_ready   = !start && (left_after != '0) && (!beat_valid || beat_done);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      words_left <= '0;
      beat_valid <= 1'b0;
      idx        <= '0;
      beat       <= '0;
    end else if (start) begin
      words_left <= nwords;
      beat_valid <= 1'b0;
      idx        <= '0;
    end else begin
      words_left <= left_after;
      if (in_valid && in_ready) begin
        beat       <= in_data;
        beat_valid <= 1'b1;
        idx        <= '0;
      end else if (beat_done) begin
        beat_valid <= 1'b0;
      end else if (wtake) begin
        idx <= idx + 1'b1;
      end
    end
  end

endmodule
