// axllm_input_buffer: holds the input vector x of the current vector-matrix product and
// hands L consecutive elements to the L lanes at each step (paper Fig. 3: element i of the
// group goes to lane i).
//
// Stored as X_LEN/L rows of L elements. The host writes one element per cycle through
// wr_*; rd_group selects a row that appears on rd_data one cycle later. The buffer size is
// this design's choice: large enough for the longest input vector evaluated in the paper
// (5120 elements).
module axllm_input_buffer
  import axllm_pkg::*;
#(
  parameter int unsigned X_LEN = 5120,
  parameter int unsigned L     = 64,
  localparam int unsigned G    = (X_LEN + L - 1) / L,
  localparam int unsigned AW   = $clog2(X_LEN),
  localparam int unsigned GW   = (G > 1) ? $clog2(G) : 1
) (
  input  logic            clk,
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_addr,
  input  act_t            wr_data,
  input  logic [GW-1:0]   rd_group,
  output act_t            rd_data [L]
);
  act_t mem [G][L];

  always_ff @(posedge clk) begin
    if (wr_en) mem[GW'(32'(wr_addr) / L)][32'(wr_addr) % L] <= wr_data;
    rd_data <= mem[rd_group];
  end
endmodule
