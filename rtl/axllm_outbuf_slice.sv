// axllm_outbuf_slice: one slice of a lane's output buffer (Out_buff) with its P+1 queues.
//
// Partial products reach the slice from the P RC slices (reuses) and from the multiplier
// (first occurrences), each through its own queue: the paper gives every Out_buff slice
// P+1 queues. A round-robin pointer takes one entry per cycle and adds it into
// Out_buff[addr] (the adder in front of Out_buff in the paper's lane figure); this is the
// shared "Out_buff write" stage. With `first` high the value overwrites the entry instead,
// so the first input element of a column tile starts the sums without a clearing pass.
// Popping a queue returns a credit to its sender (in_crd).
//
// The drain port reads an entry with one cycle of latency for the adder tree.
module axllm_outbuf_slice
  import axllm_pkg::*;
#(
  parameter int unsigned DEPTH  = 64,  // entries (paper: 64)
  parameter int unsigned P      = 4,   // RC slices; the queue count is P+1
  parameter int unsigned QDEPTH = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 first,
  input  logic    [P:0]        in_push,
  input  out_req_t             in_data [P+1],
  output logic    [P:0]        in_crd,
  input  logic [ADDR_W-1:0]    rd_addr,
  output acc_t                 rd_data,
  output logic                 busy
);
  localparam int unsigned QB = $clog2(P + 1);
  localparam int unsigned AB = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  acc_t            mem [DEPTH];
  out_req_t        head [P+1];
  logic [P:0]      q_empty, q_pop;
  logic            gv;
  logic [QB-1:0]   g;
  out_req_t        cur;
  logic [AB-1:0]   a;

  for (genvar k = 0; k <= P; k++) begin : g_q
    axllm_queue #(.T(out_req_t), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n,
      .push(in_push[k]), .wr_data(in_data[k]),
      .pop(q_pop[k]), .rd_data(head[k]),
      .empty(q_empty[k]), .full()
    );
  end

  axllm_rr_arb #(.N(P + 1)) u_arb (
    .clk, .rst_n, .req(~q_empty), .advance(gv), .gnt_valid(gv), .gnt_idx(g)
  );

  assign cur    = head[g];
  assign a      = cur.addr[AB-1:0];
  assign q_pop  = gv ? ((P+1)'(1) << g) : '0;
  assign in_crd = q_pop;

  always_ff @(posedge clk) begin
    if (gv) mem[a] <= (first ? acc_t'(0) : mem[a]) + ACC_W'(cur.val);
    rd_data <= mem[rd_addr[AB-1:0]];
  end

  assign busy = !(&q_empty);
endmodule
