// query_bram: the block RAM of one kernel's query memory.
//
// Holds the query vector as DEPTH key/value items of WIDTH bits, sorted by
// key. The published prototype gives each kernel 8 KB of block RAM for a
// query of up to 2K nonzero elements, hence 2048 x 32 bits by default.
// Simple dual port: the write port is fed from the host command sideband, the
// read port by the prefetcher. Reads are synchronous with one cycle of
// latency (rd_en in cycle t, rd_data valid in cycle t+1), as an FPGA block
// RAM is; a read of the address being written returns the old contents.
// The port arrangement and latency are this design's choices.
module query_bram #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned WIDTH = 32
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
