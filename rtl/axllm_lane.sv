// axllm_lane: one AxLLM lane, which multiplies one input element X by a segment of one
// weight row and accumulates the partial products in its output buffer.
//
// The lane is the paper's parallel lane: W_buff, the result cache (RC) and Out_buff are
// each cut into P slices, each with its own queues; one multiplier is shared.
//   W_buff slice s --(queue s of RC slice r, r = owner of |w|)--> RC slice r
//   RC slice r --hit--> queue r of Out_buff slice s
//   RC slice r --miss--> queue r of the multiplier --> RC slice r (fill) and
//                                                  --> multiplier queue of Out_buff slice s
// W_buff slice s always delivers to Out_buff slice s (column c of the segment lives at
// slice c / SLICE_DEPTH, address c % SLICE_DEPTH in both buffers), so outputs never collide.
//
// Operation: load the segment through ld_* (one entry of every slice per cycle), then pulse
// `start` with the element x, `active` (the lane has a row in this step), `first` (first
// step of a column tile: overwrite instead of accumulate) and n_cols (segment length).
// start latches x into the X register and clears the RC valid flags. `done` rises when
// every weight of the segment has been written into Out_buff. An inactive lane does
// nothing and reads back zeros until it is given a row again. Drain: rd_col selects a
// column, rd_data follows one cycle later.
//
// ev_* count, per cycle, the reuses, the multiplications and the pending-product stalls.
module axllm_lane
  import axllm_pkg::*;
#(
  parameter int unsigned P           = 4,   // slices per buffer (paper: 4)
  parameter int unsigned SLICE_DEPTH = 64,  // entries per slice (paper: 64, buffer 256)
  parameter int unsigned QDEPTH      = 4,   // queue depth (paper: S = 4)
  parameter int unsigned MUL_LAT     = 3,   // multiplier latency (paper: 3)
  localparam int unsigned BUF        = P * SLICE_DEPTH,
  localparam int unsigned CB         = $clog2(BUF + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // W_buff load: entry ld_addr of every slice
  input  logic                 ld_en,
  input  logic [ADDR_W-1:0]    ld_addr,
  input  weight_t              ld_data [P],
  // step control
  input  logic                 start,
  input  act_t                 x_in,
  input  logic                 active,
  input  logic                 first,
  input  logic [CB-1:0]        n_cols,
  output logic                 done,
  // drain
  input  logic [CB-1:0]        rd_col,
  output acc_t                 rd_data,
  // events
  output logic [$clog2(P+1)-1:0] ev_hit,
  output logic [$clog2(P+1)-1:0] ev_miss,
  output logic [$clog2(P+1)-1:0] ev_stall
);
  localparam int unsigned PB = (P > 1) ? $clog2(P) : 1;
  localparam int unsigned SB = $clog2(SLICE_DEPTH);
  localparam int unsigned EV = $clog2(P + 1);

  act_t    x_q;
  logic    running, has_data, first_q;
  logic    go;                       // start of an active step

  assign go = start && active;

  // ---- W_buff slices -------------------------------------------------------------------
  logic    [P-1:0] wb_valid [P];    // [src slice][dst RC slice]
  rc_req_t         wb_data  [P];
  logic    [P-1:0] wb_crd   [P];    // [src][dst]
  logic    [P-1:0] wb_busy;

  for (genvar s = 0; s < P; s++) begin : g_wb
    logic [ADDR_W:0] nv;
    always_comb begin
      int lim;
      lim = int'(n_cols) - s * SLICE_DEPTH;
      if (lim < 0) lim = 0;
      if (lim > SLICE_DEPTH) lim = SLICE_DEPTH;
      nv = (ADDR_W+1)'(lim);
    end
    axllm_wbuf_slice #(.DEPTH(SLICE_DEPTH), .P(P), .QDEPTH(QDEPTH)) u_wb (
      .clk, .rst_n,
      .ld_en, .ld_addr, .ld_data(ld_data[s]),
      .start(go), .n_valid(nv), .busy(wb_busy[s]),
      .req_valid(wb_valid[s]), .req_data(wb_data[s]), .crd_ret(wb_crd[s])
    );
  end

  // ---- RC slices ------------------------------------------------------------------------
  logic    [P-1:0] rc_in_push [P];  // [rc][src]
  logic    [P-1:0] rc_in_crd  [P];  // [rc][src]
  logic    [P-1:0] rc_mreq_valid;
  mul_req_t        rc_mreq_data [P];
  logic    [P-1:0] mu_in_crd;
  logic    [P-1:0] mu_rc_wr_en;
  logic [IDX_W-1:0] mu_rc_wr_idx;
  prod_t           mu_rc_wr_val;
  logic    [P-1:0] rc_hit_valid [P]; // [rc][dst out slice]
  out_req_t        rc_hit_data  [P];
  logic    [P-1:0] rc_hit_crd   [P]; // [rc][dst]
  logic    [P-1:0] rc_busy, rc_ev_hit, rc_ev_miss, rc_ev_stall;

  for (genvar r = 0; r < P; r++) begin : g_rc
    for (genvar s = 0; s < P; s++) begin : g_x
      assign rc_in_push[r][s] = wb_valid[s][r];
      assign wb_crd[s][r]     = rc_in_crd[r][s];
    end
    axllm_rc_slice #(.P(P), .ENTRIES(RC_ENTRIES / P), .QDEPTH(QDEPTH)) u_rc (
      .clk, .rst_n, .clear(go),
      .in_push(rc_in_push[r]), .in_data(wb_data), .in_crd(rc_in_crd[r]),
      .mreq_valid(rc_mreq_valid[r]), .mreq_data(rc_mreq_data[r]), .mreq_crd(mu_in_crd[r]),
      .wr_en(mu_rc_wr_en[r]), .wr_idx(mu_rc_wr_idx), .wr_val(mu_rc_wr_val),
      .hit_valid(rc_hit_valid[r]), .hit_data(rc_hit_data[r]), .hit_crd(rc_hit_crd[r]),
      .busy(rc_busy[r]), .ev_hit(rc_ev_hit[r]), .ev_miss(rc_ev_miss[r]),
      .ev_stall(rc_ev_stall[r])
    );
  end

  // ---- multiplier -----------------------------------------------------------------------
  logic    [P-1:0] mu_out_valid;
  out_req_t        mu_out_data;
  logic    [P-1:0] mu_out_crd;
  logic            mu_busy;

  axllm_mul_unit #(.P(P), .QDEPTH(QDEPTH), .LAT(MUL_LAT)) u_mul (
    .clk, .rst_n, .x(x_q),
    .in_push(rc_mreq_valid), .in_data(rc_mreq_data), .in_crd(mu_in_crd),
    .rc_wr_en(mu_rc_wr_en), .rc_wr_idx(mu_rc_wr_idx), .rc_wr_val(mu_rc_wr_val),
    .out_valid(mu_out_valid), .out_data(mu_out_data), .out_crd(mu_out_crd),
    .busy(mu_busy)
  );

  // ---- Out_buff slices ------------------------------------------------------------------
  logic    [P:0]   ob_push [P];
  out_req_t        ob_data [P][P+1];
  logic    [P:0]   ob_crd  [P];
  acc_t            ob_rd   [P];
  logic    [P-1:0] ob_busy;
  logic [ADDR_W-1:0] rd_addr;
  logic [PB-1:0]   rd_slice, rd_slice_q;

  assign rd_addr  = ADDR_W'(rd_col % SLICE_DEPTH);
  assign rd_slice = PB'(rd_col / SLICE_DEPTH);

  for (genvar s = 0; s < P; s++) begin : g_ob
    for (genvar r = 0; r < P; r++) begin : g_x
      assign ob_push[s][r]    = rc_hit_valid[r][s];
      assign ob_data[s][r]    = rc_hit_data[r];
      assign rc_hit_crd[r][s] = ob_crd[s][r];
    end
    assign ob_push[s][P] = mu_out_valid[s];
    assign ob_data[s][P] = mu_out_data;
    assign mu_out_crd[s] = ob_crd[s][P];
    axllm_outbuf_slice #(.DEPTH(SLICE_DEPTH), .P(P), .QDEPTH(QDEPTH)) u_ob (
      .clk, .rst_n, .first(first_q),
      .in_push(ob_push[s]), .in_data(ob_data[s]), .in_crd(ob_crd[s]),
      .rd_addr, .rd_data(ob_rd[s]), .busy(ob_busy[s])
    );
  end

  // ---- lane controller ------------------------------------------------------------------
  logic idle;
  assign idle = (wb_busy == '0) && (rc_busy == '0) && !mu_busy && (ob_busy == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q        <= '0;
      running    <= 1'b0;
      has_data   <= 1'b0;
      first_q    <= 1'b0;
      rd_slice_q <= '0;
    end else begin
      rd_slice_q <= rd_slice;
      if (start) begin
        if (active) begin
          x_q      <= x_in;
          running  <= 1'b1;
          // The first active step of a tile overwrites whatever an earlier tile left.
          first_q  <= first || !has_data;
          has_data <= 1'b1;
        end else if (first) begin
          has_data <= 1'b0;
        end
      end else if (running && idle) begin
        running <= 1'b0;
      end
    end
  end

  assign done    = !running;
  assign rd_data = has_data ? ob_rd[rd_slice_q] : '0;

  always_comb begin
    ev_hit = '0; ev_miss = '0; ev_stall = '0;
    for (int r = 0; r < P; r++) begin
      ev_hit   += EV'(rc_ev_hit[r]);
      ev_miss  += EV'(rc_ev_miss[r]);
      ev_stall += EV'(rc_ev_stall[r]);
    end
  end

  initial assert (SLICE_DEPTH == (1 << SB)) else $error("SLICE_DEPTH must be a power of two");
  initial assert (P == (1 << PB) || P == 1) else $error("P must be a power of two");
endmodule
