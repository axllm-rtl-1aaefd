// axllm_wbuf_slice: one slice of a lane's weight buffer (W_buff) and its fetch stage.
//
// The slice holds DEPTH weights of the lane's current weight-row segment. After `start` it
// reads them in address order, one per cycle, as the paper's "W_buff read" stage. Each
// weight is split into its result-cache key (|w|, sign, uncacheable flag) and sent to the
// RC slice that owns that key: RC slices own contiguous ranges of |w| (paper: weights of
// "identical or close values" meet in the same RC slice). The slice keeps one credit
// counter per destination queue (credit-based back-pressure, as the paper specifies);
// it fetches only when the destination has a free entry and regains a credit when the
// RC slice pops the queue.
//
// Interface: load port (ld_en/ld_addr/ld_data) writes the buffer; start + n_valid starts
// a pass over entries 0..n_valid-1; req_valid[r]/req_data push into the queue of RC slice
// r one cycle after the read; crd_ret[r] returns a credit. busy is high from start until
// the last weight has been pushed.
module axllm_wbuf_slice
  import axllm_pkg::*;
#(
  parameter int unsigned DEPTH  = 64,  // entries per slice (paper: 64)
  parameter int unsigned P      = 4,   // number of RC slices (paper: 4)
  parameter int unsigned QDEPTH = 4    // entries of each RC input queue (paper: S = 4)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // load
  input  logic                          ld_en,
  input  logic [ADDR_W-1:0]             ld_addr,
  input  weight_t                       ld_data,
  // control
  input  logic                          start,
  input  logic [ADDR_W:0]               n_valid,
  output logic                          busy,
  // to RC slice queues
  output logic [P-1:0]                  req_valid,
  output rc_req_t                       req_data,
  input  logic [P-1:0]                  crd_ret
);
  localparam int unsigned PB = (P > 1) ? $clog2(P) : 1;
  localparam int unsigned CW = $clog2(QDEPTH + 1);

  weight_t            mem [DEPTH];
  logic [ADDR_W:0]    ptr, limit;
  logic               running;
  logic [CW-1:0]      credit [P];

  wkey_t              key;
  logic [PB-1:0]      dst;
  logic               fetch;

  always_ff @(posedge clk) begin
    if (ld_en) mem[ld_addr[$clog2(DEPTH)-1:0]] <= ld_data;
  end

  assign key = weight_key(mem[ptr[$clog2(DEPTH)-1:0]]);
  // RC slice r owns |w| in [r*RC_ENTRIES/P, (r+1)*RC_ENTRIES/P).
  if (P > 1) begin : g_dst
    assign dst = key.idx[IDX_W-1 -: PB];
  end else begin : g_dst1
    assign dst = '0;
  end

  assign fetch = running && (ptr < limit) && (credit[dst] != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr       <= '0;
      limit     <= '0;
      running   <= 1'b0;
      req_valid <= '0;
      req_data  <= '0;
      for (int r = 0; r < P; r++) credit[r] <= CW'(QDEPTH);
    end else begin
      req_valid <= '0;
      if (start) begin
        ptr     <= '0;
        limit   <= n_valid;
        running <= 1'b1;
      end else if (running) begin
        if (fetch) begin
          req_valid[dst] <= 1'b1;
          req_data.key   <= key;
          req_data.addr  <= ADDR_W'(ptr);
          ptr            <= ptr + 1'b1;
        end
        if (ptr >= limit) running <= 1'b0;
      end
      for (int r = 0; r < P; r++) begin
        credit[r] <= credit[r] - CW'(fetch && !start && dst == PB'(r)) + CW'(crd_ret[r]);
      end
    end
  end

  assign busy = running || (req_valid != '0);

  initial begin
    assert (DEPTH <= (1 << ADDR_W)) else $error("DEPTH exceeds ADDR_W");
    assert (P <= (1 << SL_W))       else $error("P exceeds SL_W");
  end
  a_credit_bound: assert property (@(posedge clk) disable iff (!rst_n)
                                   credit[0] <= CW'(QDEPTH));
endmodule
