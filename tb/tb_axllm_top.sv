// tb_axllm_top: end-to-end test of the accelerator at its default size (64 lanes, 4 slices
// of 64 entries per lane buffer, 5120-element input and output buffers).
//
// The bench writes x, starts a product y = x * W and streams W in the order the controller
// asks for (beat k of a step carries W[g*64+i][c0 + s*64 + k] for lane i, slice s). W is
// generated here: a bell-shaped 8-bit distribution (sum of four uniform draws) with some
// -128 entries, which gives the value repetition quantized weights show. Every output is
// compared with a product computed here. Cases:
//   1. 20 x 40:    fewer rows than lanes (idle lanes), a partial tile;
//   2. 768 x 776:  a DistilBERT-size projection with a rank-8 LoRA adaptor A placed beside
//                  W as one 776-column matrix, so A's columns reuse W's products;
//   3. 130 x 300:  input groups with a partial last group, two tiles.
// The bench counts how often each mechanism happened and fails if one never did: reuse
// from the result cache, multiplication of a first occurrence, the uncacheable -128, a
// stall on a pending product, a W_buff fetch held back by missing credit (RC-slice
// collision), accumulation over several input groups, several column tiles, a partial
// tile, idle lanes. It also checks that reuses + multiplications = rows * columns.
module tb_axllm_top;
  import axllm_pkg::*;
  localparam int L = 64, P = 4, SD = 64, X_LEN = 5120, Y_LEN = 5120, TILE = P * SD;
  localparam int MAXR = 768, MAXC = 776;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic x_wr_en; logic [12:0] x_wr_addr; act_t x_wr_data;
  logic [12:0] cfg_rows, cfg_cols; logic start, busy, done;
  logic w_valid, w_ready; weight_t w_data [L][P];
  logic [12:0] y_rd_addr; acc_t y_rd_data;
  logic [31:0] cnt_hit, cnt_mul, cnt_stall, cnt_load_cyc, cnt_run_cyc, cnt_drain_cyc;

  axllm_top dut (.*);

  int checks = 0, failures = 0;
  weight_t W [MAXR][MAXC];
  act_t    X [MAXR];
  int n_nocache, n_credit_block, n_multi_group, n_multi_tile, n_partial_tile, n_idle_lanes;

  // a W_buff fetch held back only by a missing credit, observed in lane 0, slice 0
  always @(posedge clk)
    if (dut.g_lane[0].u_lane.g_wb[0].u_wb.running &&
        dut.g_lane[0].u_lane.g_wb[0].u_wb.ptr < dut.g_lane[0].u_lane.g_wb[0].u_wb.limit &&
        !dut.g_lane[0].u_lane.g_wb[0].u_wb.fetch && !dut.g_lane[0].u_lane.g_wb[0].u_wb.start)
      n_credit_block++;

  function automatic weight_t gen_w();
    int v;
    if ($urandom_range(0, 199) == 0) return weight_t'(-128);
    v = 0;
    for (int k = 0; k < 4; k++) v += $urandom_range(0, 64) - 32;
    if (v > 127) v = 127;
    if (v < -127) v = -127;
    return weight_t'(v);
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int rows, input int cols, input string name);
    int groups, t0, h0, m0, s0;
    groups = (rows + L - 1) / L;
    for (int r = 0; r < rows; r++) begin
      X[r] = act_t'($urandom);
      for (int c = 0; c < cols; c++) begin
        W[r][c] = gen_w();
        if (W[r][c] == -128) n_nocache++;
      end
    end
    for (int r = 0; r < rows; r++) begin
      @(negedge clk); x_wr_en = 1; x_wr_addr = 13'(r); x_wr_data = X[r];
    end
    @(negedge clk); x_wr_en = 0;
    cfg_rows = 13'(rows); cfg_cols = 13'(cols); start = 1;
    h0 = int'(cnt_hit); m0 = int'(cnt_mul); s0 = int'(cnt_stall); t0 = $time;
    @(negedge clk); start = 0;
    // stream the weights in controller order
    for (int c0 = 0; c0 < cols; c0 += TILE) begin
      int tw; tw = (cols - c0 < TILE) ? cols - c0 : TILE;
      if (tw < TILE) n_partial_tile++;
      if (c0 > 0) n_multi_tile++;
      for (int g = 0; g < groups; g++) begin
        int nb; nb = (tw < SD) ? tw : SD;
        if (g > 0) n_multi_group++;
        if (g * L + L > rows) n_idle_lanes++;
        for (int k = 0; k < nb; k++) begin
          for (int i = 0; i < L; i++)
            for (int s = 0; s < P; s++) begin
              int r, c; r = g * L + i; c = c0 + s * SD + k;
              w_data[i][s] = (r < rows && c - c0 < tw) ? W[r][c] : weight_t'(0);
            end
          // at a falling edge: the beat is taken by the next rising edge if w_ready is high
          w_valid = 1;
          while (!w_ready) @(negedge clk);
          @(negedge clk);
        end
        w_valid = 0;
      end
    end
    while (busy) @(negedge clk);
    $display("%s: %0d x %0d in %0d cycles (load %0d, compute %0d, drain %0d so far), reuse %0d, mult %0d, stall %0d",
             name, rows, cols, ($time - t0) / 10, cnt_load_cyc, cnt_run_cyc, cnt_drain_cyc,
             int'(cnt_hit) - h0, int'(cnt_mul) - m0, int'(cnt_stall) - s0);
    checks++;
    if (int'(cnt_hit) - h0 + int'(cnt_mul) - m0 != rows * cols) begin
      failures++; $display("FAIL %s: reuse + mult != rows*cols", name);
    end
    for (int c = 0; c < cols; c++) begin
      longint ref_y; ref_y = 0;
      for (int r = 0; r < rows; r++) ref_y += longint'(X[r]) * longint'(W[r][c]);
      y_rd_addr = 13'(c);
      @(negedge clk);
      checks++;
      if (y_rd_data !== acc_t'(ref_y)) begin
        failures++;
        if (failures < 10) $display("FAIL %s y[%0d] = %0d expected %0d", name, c, y_rd_data, ref_y);
      end
    end
  endtask

  task automatic seen(input string what, input int n);
    checks++;
    $display("mechanism %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    x_wr_en = 0; x_wr_addr = 0; x_wr_data = 0; cfg_rows = 0; cfg_cols = 0; start = 0;
    w_valid = 0; y_rd_addr = 0;
    foreach (w_data[i, s]) w_data[i][s] = 0;
    n_nocache = 0; n_credit_block = 0; n_multi_group = 0; n_multi_tile = 0;
    n_partial_tile = 0; n_idle_lanes = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(20, 40, "small");
    run(768, 776, "distilbert+lora");
    run(130, 300, "ragged");
    seen("reuse from result cache", int'(cnt_hit));
    seen("multiplication", int'(cnt_mul));
    seen("uncacheable -128 weight", n_nocache);
    seen("stall on pending product", int'(cnt_stall));
    seen("credit back-pressure", n_credit_block);
    seen("accumulate over groups", n_multi_group);
    seen("several column tiles", n_multi_tile);
    seen("partial tile", n_partial_tile);
    seen("idle lanes", n_idle_lanes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
