// axllm_mul_unit: the single multiplier of a lane with its P input queues.
//
// Only first occurrences of a weight magnitude (and the uncacheable -128) reach it, so one
// multiplier serves all slices of the lane (paper Sec. IV). One queue per RC slice feeds
// it; a round-robin pointer picks one request per cycle. The product |w|*X passes through
// a LAT-stage pipeline (paper: 3 cycles). On leaving the pipeline it is written into the RC
// slice that sent the request (setting that entry's valid flag), and, negated for a
// negative weight, pushed into the multiplier queue of the Out_buff slice the weight came
// from. The Out_buff side uses credits; a request is taken only when its destination has
// one reserved, so the pipeline itself never stalls.
//
// x is the lane's X register and must stay constant while requests are in flight.
module axllm_mul_unit
  import axllm_pkg::*;
#(
  parameter int unsigned P      = 4,  // RC slices and Out_buff slices (paper: 4)
  parameter int unsigned QDEPTH = 4,  // queue depth (paper: S)
  parameter int unsigned LAT    = 3   // multiplier latency in cycles (paper: 3)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  act_t              x,
  // from RC slices
  input  logic    [P-1:0]   in_push,
  input  mul_req_t          in_data [P],
  output logic    [P-1:0]   in_crd,
  // result cache write-back (one-hot by RC slice)
  output logic    [P-1:0]   rc_wr_en,
  output logic [IDX_W-1:0]  rc_wr_idx,
  output prod_t             rc_wr_val,
  // to Out_buff slices (one-hot by source slice)
  output logic    [P-1:0]   out_valid,
  output out_req_t          out_data,
  input  logic    [P-1:0]   out_crd,
  output logic              busy
);
  localparam int unsigned PB = (P > 1) ? $clog2(P) : 1;
  localparam int unsigned CW = $clog2(QDEPTH + 1);

  mul_req_t          head [P];
  logic    [P-1:0]   q_empty, q_pop;

  for (genvar r = 0; r < P; r++) begin : g_q
    axllm_queue #(.T(mul_req_t), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n,
      .push(in_push[r]), .wr_data(in_data[r]),
      .pop(q_pop[r]), .rd_data(head[r]),
      .empty(q_empty[r]), .full()
    );
  end

  logic           gv, issue;
  logic [PB-1:0]  g;
  logic [CW-1:0]  ocred [P];
  mul_req_t       cur;

  axllm_rr_arb #(.N(P)) u_arb (
    .clk, .rst_n, .req(~q_empty), .advance(issue), .gnt_valid(gv), .gnt_idx(g)
  );

  assign cur   = head[g];
  assign issue = gv && (ocred[cur.src[PB-1:0]] != '0);
  assign q_pop = issue ? (P'(1) << g) : '0;
  assign in_crd = q_pop;

  // Pipeline stage records: the product moves down LAT registers.
  typedef struct packed {
    logic           v;
    logic [PB-1:0]  rcs;   // RC slice to write
    mul_req_t       req;
    prod_t          p;
  } stage_t;

  stage_t st [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < LAT; k++) st[k] <= '0;
      for (int s = 0; s < P; s++) ocred[s] <= CW'(QDEPTH);
    end else begin
      st[0].v   <= issue;
      st[0].rcs <= g;
      st[0].req <= cur;
      st[0].p   <= PROD_W'($signed({1'b0, key_mag(cur.key)}) * x);
      for (int k = 1; k < LAT; k++) st[k] <= st[k-1];
      for (int s = 0; s < P; s++)
        ocred[s] <= ocred[s] - CW'(issue && cur.src[PB-1:0] == PB'(s)) + CW'(out_crd[s]);
    end
  end

  stage_t last;
  assign last = st[LAT-1];

  always_comb begin
    rc_wr_en  = (last.v && !last.req.key.nocache) ? (P'(1) << last.rcs) : '0;
    rc_wr_idx = last.req.key.idx;
    rc_wr_val = last.p;
    out_valid = last.v ? (P'(1) << last.req.src[PB-1:0]) : '0;
    out_data.val  = last.req.key.neg ? -last.p : last.p;
    out_data.addr = last.req.addr;
  end

  always_comb begin
    busy = !(&q_empty);
    for (int k = 0; k < LAT; k++) busy |= st[k].v;
  end

  initial assert (LAT >= 1) else $error("LAT must be at least 1");
endmodule
