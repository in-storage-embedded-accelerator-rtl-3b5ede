// spm_accelerator: one accelerator slice of the in-storage search engine.
//
// The slice holds NUM_KERNELS independent sparse pattern matching kernels
// (eight in the published prototype, enough to keep up with about 2 GB/s of
// flash bandwidth). Every kernel has its own query memory and its own set of
// accelerator ports: dataIn from the flash storage interface, commandIn from
// the host and resultsToMemory to the host. Which flash pages go to which
// kernel is decided by the host software and carried out by the flash
// storage interface outside this module, so the ports of all kernels are
// brought out side by side as arrays, index k belonging to kernel k.
//
// Each kernel searches its own part of the dataset against its own query;
// loading the same query into every kernel splits one search K ways, and
// loading different queries batches several searches over the same data.
// Timing is that of spm_kernel, per kernel.
module spm_accelerator
  import spm_pkg::*;
#(
  parameter int unsigned NUM_KERNELS = 8,
  parameter int unsigned QDEPTH      = 2048,
  parameter int unsigned PF_DEPTH    = 4,
  parameter int unsigned EPOCH_W     = 4,
  parameter int unsigned PORT_DEPTH  = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 data_in_valid [NUM_KERNELS],
  output logic                 data_in_ready [NUM_KERNELS],
  input  logic [DATA_IN_W-1:0] data_in       [NUM_KERNELS],
  input  logic                 cmd_in_valid  [NUM_KERNELS],
  output logic                 cmd_in_ready  [NUM_KERNELS],
  input  logic [CMD_W-1:0]     cmd_in        [NUM_KERNELS],
  output logic                 result_valid  [NUM_KERNELS],
  input  logic                 result_ready  [NUM_KERNELS],
  output logic [RESULT_W-1:0]  result        [NUM_KERNELS],
  output logic                 busy          [NUM_KERNELS]
);
  for (genvar k = 0; k < NUM_KERNELS; k++) begin : g_kernel
    spm_kernel #(
      .QDEPTH(QDEPTH), .PF_DEPTH(PF_DEPTH), .EPOCH_W(EPOCH_W), .PORT_DEPTH(PORT_DEPTH)
    ) u_kernel (
      .clk           (clk),
      .rst_n         (rst_n),
      .data_in_valid (data_in_valid[k]),
      .data_in_ready (data_in_ready[k]),
      .data_in       (data_in[k]),
      .cmd_in_valid  (cmd_in_valid[k]),
      .cmd_in_ready  (cmd_in_ready[k]),
      .cmd_in        (cmd_in[k]),
      .result_valid  (result_valid[k]),
      .result_ready  (result_ready[k]),
      .result        (result[k]),
      .busy          (busy[k])
    );
  end

endmodule
