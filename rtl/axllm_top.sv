// axllm_top: the AxLLM accelerator, a vector-matrix engine that skips repeated
// multiplications of quantized weights by caching and reusing their products.
//
// Structure (paper Fig. 3): L lanes work on L input elements at once, lane i taking x[i]
// and row i of the weight matrix; an adder tree sums the lanes' partial sums column by
// column into the global output buffer. Inside every lane a result cache holds |u|*x for
// each weight magnitude u already met in the row, so only the first occurrence of a
// magnitude is multiplied (see axllm_lane). A controller walks the matrix in column tiles
// of P*SLICE_DEPTH and input groups of L (see axllm_controller).
//
// Use: write x through x_wr_*; set cfg_rows (K, length of x) and cfg_cols (N, columns of
// W, or of W and a LoRA adaptor A side by side) and pulse start; deliver the weights on
// the w_* stream (valid/ready, order given in axllm_controller); wait for done; read y
// through y_rd_* (one cycle latency). The counters count reuses, multiplications, stalls
// on a pending product, and cycles in the load, compute and drain phases since reset.
//
// The weight memory that produces the stream is outside this design.
module axllm_top
  import axllm_pkg::*;
#(
  parameter int unsigned L           = 64,   // lanes (paper: 64)
  parameter int unsigned P           = 4,    // slices per lane buffer (paper: 4)
  parameter int unsigned SLICE_DEPTH = 64,   // entries per slice (paper: 64)
  parameter int unsigned QDEPTH      = 4,    // queue depth (paper: S = 4)
  parameter int unsigned MUL_LAT     = 3,    // multiplier latency (paper: 3)
  parameter int unsigned X_LEN       = 5120, // longest input vector
  parameter int unsigned Y_LEN       = 5120, // longest output vector
  localparam int unsigned XA = $clog2(X_LEN),
  localparam int unsigned YA = $clog2(Y_LEN),
  localparam int unsigned XW = $clog2(X_LEN + 1),
  localparam int unsigned YW = $clog2(Y_LEN + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // input vector
  input  logic              x_wr_en,
  input  logic [XA-1:0]     x_wr_addr,
  input  act_t              x_wr_data,
  // command
  input  logic [XW-1:0]     cfg_rows,
  input  logic [YW-1:0]     cfg_cols,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // weight stream: w_data[i][s] is the weight for lane i, slice s
  input  logic              w_valid,
  output logic              w_ready,
  input  weight_t           w_data [L][P],
  // output vector
  input  logic [YA-1:0]     y_rd_addr,
  output acc_t              y_rd_data,
  // counters
  output logic [31:0]       cnt_hit,
  output logic [31:0]       cnt_mul,
  output logic [31:0]       cnt_stall,
  output logic [31:0]       cnt_load_cyc,
  output logic [31:0]       cnt_run_cyc,
  output logic [31:0]       cnt_drain_cyc
);
  localparam int unsigned TILE     = P * SLICE_DEPTH;
  localparam int unsigned CB       = $clog2(TILE + 1);
  localparam int unsigned G        = (X_LEN + L - 1) / L;
  localparam int unsigned GW       = (G > 1) ? $clog2(G) : 1;
  localparam int unsigned TREE_LAT = (L > 1) ? $clog2(L) : 1;
  localparam int unsigned EV       = $clog2(P + 1);

  logic              ld_en, lane_start, lane_first, lanes_done;
  logic [ADDR_W-1:0] ld_addr;
  logic [L-1:0]      lane_active, lane_done;
  logic [CB-1:0]     lane_ncols, rd_col;
  logic [GW-1:0]     x_group;
  act_t              x_grp [L];
  acc_t              lane_rd [L];
  logic              tree_in_v, tree_out_v;
  logic [YA-1:0]     tree_in_tag, tree_out_tag;
  acc_t              tree_out;
  logic              ev_load, ev_run, ev_drain;
  logic [EV-1:0]     l_hit [L], l_miss [L], l_stall [L];

  axllm_input_buffer #(.X_LEN(X_LEN), .L(L)) u_xbuf (
    .clk, .wr_en(x_wr_en), .wr_addr(x_wr_addr), .wr_data(x_wr_data),
    .rd_group(x_group), .rd_data(x_grp)
  );

  axllm_controller #(
    .L(L), .P(P), .SLICE_DEPTH(SLICE_DEPTH), .X_LEN(X_LEN), .Y_LEN(Y_LEN),
    .TREE_LAT(TREE_LAT)
  ) u_ctrl (
    .clk, .rst_n, .start, .cfg_rows, .cfg_cols, .busy, .done,
    .w_valid, .w_ready, .x_group,
    .ld_en, .ld_addr, .lane_start, .lane_first, .lane_active, .lane_ncols, .lanes_done,
    .rd_col, .tree_valid(tree_in_v), .tree_tag(tree_in_tag),
    .ev_load, .ev_run, .ev_drain
  );

  for (genvar i = 0; i < L; i++) begin : g_lane
    axllm_lane #(.P(P), .SLICE_DEPTH(SLICE_DEPTH), .QDEPTH(QDEPTH), .MUL_LAT(MUL_LAT)) u_lane (
      .clk, .rst_n,
      .ld_en, .ld_addr, .ld_data(w_data[i]),
      .start(lane_start), .x_in(x_grp[i]), .active(lane_active[i]), .first(lane_first),
      .n_cols(lane_ncols), .done(lane_done[i]),
      .rd_col, .rd_data(lane_rd[i]),
      .ev_hit(l_hit[i]), .ev_miss(l_miss[i]), .ev_stall(l_stall[i])
    );
  end
  assign lanes_done = &lane_done;

  axllm_adder_tree #(.N(L), .TAG_W(YA)) u_tree (
    .clk, .rst_n, .in_valid(tree_in_v), .in_tag(tree_in_tag), .in_data(lane_rd),
    .out_valid(tree_out_v), .out_tag(tree_out_tag), .out_data(tree_out)
  );

  axllm_output_buffer #(.Y_LEN(Y_LEN)) u_ybuf (
    .clk, .wr_en(tree_out_v), .wr_addr(tree_out_tag), .wr_data(tree_out),
    .rd_addr(y_rd_addr), .rd_data(y_rd_data)
  );

  // ---- event counters -------------------------------------------------------------------
  logic [31:0] sum_hit, sum_mul, sum_stall;
  always_comb begin
    sum_hit = '0; sum_mul = '0; sum_stall = '0;
    for (int i = 0; i < L; i++) begin
      sum_hit   += 32'(l_hit[i]);
      sum_mul   += 32'(l_miss[i]);
      sum_stall += 32'(l_stall[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_hit <= '0; cnt_mul <= '0; cnt_stall <= '0;
      cnt_load_cyc <= '0; cnt_run_cyc <= '0; cnt_drain_cyc <= '0;
    end else begin
      cnt_hit       <= cnt_hit + sum_hit;
      cnt_mul       <= cnt_mul + sum_mul;
      cnt_stall     <= cnt_stall + sum_stall;
      cnt_load_cyc  <= cnt_load_cyc + 32'(ev_load);
      cnt_run_cyc   <= cnt_run_cyc + 32'(ev_run);
      cnt_drain_cyc <= cnt_drain_cyc + 32'(ev_drain);
    end
  end
endmodule
