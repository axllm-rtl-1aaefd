// axllm_output_buffer: the global output buffer that receives the adder-tree totals.
//
// One write port (from the adder tree) and one read port (to the host), read latency one
// cycle. Sized for the widest output vector evaluated in the paper (5120 elements); the
// size is this design's choice. Each element is written once, because the lanes already
// accumulate all input groups of a column tile before they are drained.
module axllm_output_buffer
  import axllm_pkg::*;
#(
  parameter int unsigned Y_LEN = 5120,
  localparam int unsigned AW   = $clog2(Y_LEN)
) (
  input  logic           clk,
  input  logic           wr_en,
  input  logic [AW-1:0]  wr_addr,
  input  acc_t           wr_data,
  input  logic [AW-1:0]  rd_addr,
  output acc_t           rd_data
);
  acc_t mem [Y_LEN];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
