// axllm_rc_slice: one slice of a lane's result cache (RC) with its valid flags and its P
// input queues, the heart of computation reuse.
//
// The RC keeps, for the input element X held by the lane, the product |u|*X for every
// weight magnitude u seen so far in the current weight row. This slice owns ENTRIES of
// those magnitudes. Each cycle it takes the head of one input queue (round robin over the
// P W_buff slices) and checks the valid flag of RC[u]:
//   * valid: reuse. RC[u] is read and, negated for a negative weight, sent to the
//     Out_buff slice the weight came from, bypassing the multiplier (paper Fig. 4b).
//   * not valid and no product pending: first occurrence. The weight goes to the
//     multiplier queue and the entry is marked pending (paper Fig. 4a).
//   * not valid but pending: the product is still in the multiplier. The slice stalls
//     until the multiplier writes it back (paper: the only stall of the pipeline).
//   * uncacheable (w = -128): always multiplied, nothing cached.
// The multiplier writes results through a second port (wr_en/wr_idx/wr_val), setting the
// valid flag; the paper's dual-port RC. A read and that write never hit the same entry in
// one cycle, because a read needs the flag already set. `clear` resets all valid and pending
// flags when the lane moves to a new input element.
//
// Timing: one cycle, the paper's "RC read" stage; results leave through registers. All
// outputs use credit flow control: one credit counter per destination queue.
module axllm_rc_slice
  import axllm_pkg::*;
#(
  parameter int unsigned P       = 4,   // W_buff / Out_buff slices (paper: 4)
  parameter int unsigned ENTRIES = 32,  // RC entries in this slice (paper: 128/4)
  parameter int unsigned QDEPTH  = 4    // depth of each queue (paper: S)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  // from the W_buff slices: one queue per source slice
  input  logic    [P-1:0]    in_push,
  input  rc_req_t            in_data [P],
  output logic    [P-1:0]    in_crd,      // credit back to W_buff slice s (queue popped)
  // to the multiplier queue of this slice
  output logic               mreq_valid,
  output mul_req_t           mreq_data,
  input  logic               mreq_crd,
  // write port from the multiplier
  input  logic               wr_en,
  input  logic [IDX_W-1:0]   wr_idx,
  input  prod_t              wr_val,
  // hits to the Out_buff slices (one-hot by source slice)
  output logic    [P-1:0]    hit_valid,
  output out_req_t           hit_data,
  input  logic    [P-1:0]    hit_crd,
  // status
  output logic               busy,
  output logic               ev_hit,      // a reuse happened this cycle
  output logic               ev_miss,     // a weight was sent to the multiplier
  output logic               ev_stall     // head blocked on a pending product
);
  localparam int unsigned PB = (P > 1) ? $clog2(P) : 1;
  localparam int unsigned EB = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;
  localparam int unsigned CW = $clog2(QDEPTH + 1);

  prod_t              rc    [ENTRIES];
  logic [ENTRIES-1:0] valid, pending;

  rc_req_t            head  [P];
  logic    [P-1:0]    q_empty, q_pop;

  for (genvar s = 0; s < P; s++) begin : g_q
    axllm_queue #(.T(rc_req_t), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n,
      .push(in_push[s]), .wr_data(in_data[s]),
      .pop(q_pop[s]), .rd_data(head[s]),
      .empty(q_empty[s]), .full()
    );
  end

  logic           gv, adv;
  logic [PB-1:0]  g;
  axllm_rr_arb #(.N(P)) u_arb (
    .clk, .rst_n, .req(~q_empty), .advance(adv), .gnt_valid(gv), .gnt_idx(g)
  );

  logic [CW-1:0]  mcred;
  logic [CW-1:0]  hcred [P];

  rc_req_t        cur;
  logic [EB-1:0]  e;
  logic           do_hit, do_miss, blocked;

  always_comb begin
    cur     = head[g];
    e       = cur.key.idx[EB-1:0];
    do_hit  = 1'b0;
    do_miss = 1'b0;
    blocked = 1'b0;
    if (gv) begin
      if (cur.key.nocache) begin
        do_miss = (mcred != '0);
      end else if (valid[e]) begin
        do_hit  = (hcred[g] != '0);
      end else if (pending[e]) begin
        blocked = 1'b1;
      end else begin
        do_miss = (mcred != '0);
      end
    end
    adv   = do_hit || do_miss;
    q_pop = adv ? (P'(1) << g) : '0;
  end

  assign in_crd = q_pop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid      <= '0;
      pending    <= '0;
      mreq_valid <= 1'b0;
      mreq_data  <= '0;
      hit_valid  <= '0;
      hit_data   <= '0;
      mcred      <= CW'(QDEPTH);
      for (int s = 0; s < P; s++) hcred[s] <= CW'(QDEPTH);
    end else begin
      mreq_valid <= do_miss;
      hit_valid  <= do_hit ? (P'(1) << g) : '0;
      if (do_miss) begin
        mreq_data.key  <= cur.key;
        mreq_data.addr <= cur.addr;
        mreq_data.src  <= SL_W'(g);
      end
      if (do_hit) begin
        hit_data.val  <= cur.key.neg ? -rc[e] : rc[e];
        hit_data.addr <= cur.addr;
      end
      mcred <= mcred - CW'(do_miss) + CW'(mreq_crd);
      for (int s = 0; s < P; s++)
        hcred[s] <= hcred[s] - CW'(do_hit && g == PB'(s)) + CW'(hit_crd[s]);
      if (clear) begin
        valid   <= '0;
        pending <= '0;
      end else begin
        if (do_miss && !cur.key.nocache) pending[e] <= 1'b1;
        if (wr_en) begin
          valid[wr_idx[EB-1:0]]   <= 1'b1;
          pending[wr_idx[EB-1:0]] <= 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) rc[wr_idx[EB-1:0]] <= wr_val;
  end

  assign busy     = !(&q_empty) || mreq_valid || (hit_valid != '0);
  assign ev_hit   = do_hit;
  assign ev_miss  = do_miss;
  assign ev_stall = blocked;

  // The dual-port RC: a reuse read and a multiplier write never meet on one entry.
  a_no_rw_clash: assert property (@(posedge clk) disable iff (!rst_n)
                                  (do_hit && wr_en) |-> (wr_idx[EB-1:0] != e));
  // A product is written back only for an entry that is waiting for it.
  a_wr_pending:  assert property (@(posedge clk) disable iff (!rst_n || clear)
                                  wr_en |-> pending[wr_idx[EB-1:0]]);
endmodule
