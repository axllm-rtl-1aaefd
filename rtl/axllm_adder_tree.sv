// axllm_adder_tree: sums the partial sums of the L lanes into one output element.
//
// The paper only names an adder tree between the lanes and the output buffer. Here it is a
// binary tree of ceil(log2 N) levels, each level registered, so one column of all lanes
// enters per cycle and its total leaves LEVELS cycles later with out_valid and the tag
// (the output column) it entered with. Inputs beyond N at a level are padded with zero.
module axllm_adder_tree
  import axllm_pkg::*;
#(
  parameter int unsigned N     = 64,  // number of lanes (paper: 64)
  parameter int unsigned TAG_W = 16,
  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned NP     = 1 << LEVELS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [TAG_W-1:0]  in_tag,
  input  acc_t              in_data [N],
  output logic              out_valid,
  output logic [TAG_W-1:0]  out_tag,
  output acc_t              out_data
);
  // Level k is a generate block holding its own NP >> k registered partial sums, fed by
  // the level below it (level 0 is the zero-padded input).
  for (genvar k = 0; k <= LEVELS; k++) begin : g_lvl
    localparam int unsigned W = NP >> k;
    acc_t             sum [W];
    logic             vld;
    logic [TAG_W-1:0] tag;
    if (k == 0) begin : g_in
      for (genvar i = 0; i < W; i++) begin : g_pad
        if (i < N) begin : g_use
          assign sum[i] = in_data[i];
        end else begin : g_zero
          assign sum[i] = '0;
        end
      end
      assign vld = in_valid;
      assign tag = in_tag;
    end else begin : g_add
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          vld <= 1'b0;
          tag <= '0;
          for (int i = 0; i < W; i++) sum[i] <= '0;
        end else begin
          vld <= g_lvl[k-1].vld;
          tag <= g_lvl[k-1].tag;
          for (int i = 0; i < W; i++) sum[i] <= g_lvl[k-1].sum[2*i] + g_lvl[k-1].sum[2*i+1];
        end
      end
    end
  end

  assign out_valid = g_lvl[LEVELS].vld;
  assign out_tag   = g_lvl[LEVELS].tag;
  assign out_data  = g_lvl[LEVELS].sum[0];
endmodule
