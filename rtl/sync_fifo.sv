// sync_fifo: small synchronous FIFO with valid/ready handshakes on both sides.
//
// Storage is a register array of DEPTH entries (DEPTH a power of two) with
// read and write pointers one bit wider than the address, so full and empty
// are told apart by the extra bit. A word written in one cycle can be read in
// the next; there is no fall-through. in_ready is low when full, out_valid is
// low when empty; the FIFO may be written and read in the same cycle.
// count reports the number of entries held. This helper backs the port queues
// of the accelerator interface and the prefetch queues of the query memory.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [WIDTH-1:0]       in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [WIDTH-1:0]       out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;
  logic             push, pop;

  assign count     = wptr - rptr;
  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rptr[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (push) wptr <= wptr + 1'b1;
      if (pop)  rptr <= rptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wptr[AW-1:0]] <= in_data;
  end

  initial begin
    assert (DEPTH >= 2 && (1 << AW) == DEPTH)
      else $error("sync_fifo: DEPTH must be a power of two >= 2");
  end

endmodule
