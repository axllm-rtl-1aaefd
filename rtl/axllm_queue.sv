// axllm_queue: the small FIFO that sits in front of every RC slice, the multiplier and
// every Out_buff slice of a lane (the blue blocks of the paper's parallel-lane figure).
//
// A register FIFO of DEPTH entries of type T. The head is visible combinationally on
// rd_data while !empty; push and pop may happen in the same cycle. Senders do not look at
// `full`: they hold one credit per entry (see the lane modules), so a push into a full
// queue is a protocol error, which the assertions flag. The paper sizes each queue at S
// entries, S being the number of slices; the depth is a parameter here.
module axllm_queue #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     wr_data,
  input  logic pop,
  output T     rd_data,
  output logic empty,
  output logic full
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                mem [DEPTH];
  logic [PW-1:0]   wp, rp;
  logic [PW:0]     cnt;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) wp <= inc(wp);
      if (pop)  rp <= inc(rp);
      cnt <= cnt + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= wr_data;
  end

  assign rd_data = mem[rp];
  assign empty   = (cnt == '0);
  assign full    = (cnt == (PW+1)'(DEPTH));

  // Credit flow control must never overrun or underrun a queue.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
