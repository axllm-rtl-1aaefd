// axllm_controller: the sequencer of one vector-matrix product y = x * W (K rows, N columns).
//
// It implements the paper's buffer-size management: the columns of W are processed in
// tiles of TILE = P*SLICE_DEPTH columns (paper: 256), so at most TILE output sums are
// incomplete at any time. Within a tile, the K input elements are taken L at a time
// (input group g gives element g*L+i to lane i). For each group the controller
//   LOAD   accepts min(SLICE_DEPTH, tile width) weight beats from the weight stream; beat k
//          carries, for every lane i and slice s, W[g*L+i][c0 + s*SLICE_DEPTH + k];
//   START  pulses the lanes with their x element (first = first group of the tile);
//   RUN    waits until every lane has written its whole row segment into Out_buff.
// After the last group of the tile it DRAINs: one column per cycle is read from all lanes,
// summed by the adder tree and written into the output buffer at c0 + column.
// Loading, computing and draining do not overlap; the paper describes no double buffering.
//
// Interface: cfg_rows/cfg_cols and start (pulse) begin a product; busy is high until the
// last output is written; done pulses once at the end. ev_* mark the phase of each cycle.
module axllm_controller
  import axllm_pkg::*;
#(
  parameter int unsigned L           = 64,
  parameter int unsigned P           = 4,
  parameter int unsigned SLICE_DEPTH = 64,
  parameter int unsigned X_LEN       = 5120,
  parameter int unsigned Y_LEN       = 5120,
  parameter int unsigned TREE_LAT    = 6,    // adder tree latency in cycles
  localparam int unsigned TILE = P * SLICE_DEPTH,
  localparam int unsigned CB   = $clog2(TILE + 1),
  localparam int unsigned G    = (X_LEN + L - 1) / L,
  localparam int unsigned GW   = (G > 1) ? $clog2(G) : 1,
  localparam int unsigned XW   = $clog2(X_LEN + 1),
  localparam int unsigned YW   = $clog2(Y_LEN + 1),
  localparam int unsigned YA   = $clog2(Y_LEN)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [XW-1:0]     cfg_rows,
  input  logic [YW-1:0]     cfg_cols,
  output logic              busy,
  output logic              done,
  // weight stream handshake
  input  logic              w_valid,
  output logic              w_ready,
  // input buffer
  output logic [GW-1:0]     x_group,
  // lanes
  output logic              ld_en,
  output logic [ADDR_W-1:0] ld_addr,
  output logic              lane_start,
  output logic              lane_first,
  output logic [L-1:0]      lane_active,
  output logic [CB-1:0]     lane_ncols,
  input  logic              lanes_done,
  output logic [CB-1:0]     rd_col,
  // adder tree input side
  output logic              tree_valid,
  output logic [YA-1:0]     tree_tag,
  // phase markers
  output logic              ev_load,
  output logic              ev_run,
  output logic              ev_drain
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_START, S_RUN, S_DRAIN, S_FLUSH} state_t;
  state_t state;

  logic [YW-1:0]  c0;        // first column of the tile
  logic [CB-1:0]  tw;        // tile width
  logic [GW-1:0]  g;         // input group
  logic [XW-1:0]  rows;
  logic [YW-1:0]  cols;
  logic [CB-1:0]  k;         // beat / drain column counter
  logic [7:0]     flush;
  logic           rd_v;
  logic [YA-1:0]  rd_tag;

  logic [CB-1:0]  beats;
  logic [XW:0]    next_row;
  logic [YW:0]    rem;

  assign beats    = (tw < CB'(SLICE_DEPTH)) ? tw : CB'(SLICE_DEPTH);
  assign next_row = ((XW+1)'(g) + 1'b1) * (XW+1)'(L);
  assign rem      = (YW+1)'(cols) - (YW+1)'(c0) - (YW+1)'(tw);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      c0     <= '0;
      tw     <= '0;
      g      <= '0;
      rows   <= '0;
      cols   <= '0;
      k      <= '0;
      flush  <= '0;
      done   <= 1'b0;
      rd_v   <= 1'b0;
      rd_tag <= '0;
    end else begin
      done   <= 1'b0;
      rd_v   <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          rows  <= cfg_rows;
          cols  <= cfg_cols;
          c0    <= '0;
          g     <= '0;
          k     <= '0;
          tw    <= (cfg_cols < YW'(TILE)) ? CB'(cfg_cols) : CB'(TILE);
          state <= (cfg_rows == '0 || cfg_cols == '0) ? S_FLUSH : S_LOAD;
          flush <= '0;
        end
        S_LOAD: if (w_valid) begin
          if (k == beats - 1'b1) begin
            k     <= '0;
            state <= S_START;
          end else begin
            k <= k + 1'b1;
          end
        end
        S_START: state <= S_RUN;
        S_RUN: if (lanes_done) begin
          if (next_row >= (XW+1)'(rows)) begin
            state <= S_DRAIN;
            k     <= '0;
          end else begin
            g     <= g + 1'b1;
            state <= S_LOAD;
          end
        end
        S_DRAIN: begin
          rd_v   <= 1'b1;
          rd_tag <= YA'(c0 + YW'(k));
          if (k == tw - 1'b1) begin
            state <= S_FLUSH;
            flush <= 8'(TREE_LAT + 2);
          end else begin
            k <= k + 1'b1;
          end
        end
        S_FLUSH: begin
          if (flush != '0) begin
            flush <= flush - 1'b1;
          end else if (rows == '0 || rem == '0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            c0    <= c0 + YW'(tw);
            tw    <= (rem < (YW+1)'(TILE)) ? CB'(rem) : CB'(TILE);
            g     <= '0;
            k     <= '0;
            state <= S_LOAD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy       = (state != S_IDLE);
  assign w_ready    = (state == S_LOAD);
  assign x_group    = g;
  assign ld_en      = (state == S_LOAD) && w_valid;
  assign ld_addr    = ADDR_W'(k);
  assign lane_start = (state == S_START);
  assign lane_first = (g == '0);
  assign lane_ncols = tw;
  assign rd_col     = k;
  assign tree_valid = rd_v;
  assign tree_tag   = rd_tag;
  assign ev_load    = (state == S_LOAD);
  assign ev_run     = (state == S_START) || (state == S_RUN);
  assign ev_drain   = (state == S_DRAIN) || (state == S_FLUSH);

  always_comb begin
    for (int i = 0; i < L; i++)
      lane_active[i] = ((XW+1)'(g) * (XW+1)'(L) + (XW+1)'(i)) < (XW+1)'(rows);
  end

  a_tile_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
                                     (state == S_LOAD) |-> (tw != '0));
endmodule
