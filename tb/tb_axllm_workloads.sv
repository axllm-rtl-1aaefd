// tb_axllm_workloads: runs the weight-matrix shapes of the models the accelerator targets
// on the default-size design and checks every output.
//
//   BERT-large projection   1024 x 1024  (all rows)
//   Llama-7B projection     4096 x 4096  (first 2048 rows, all columns)
//   Llama-13B projection    5120 x 5120  (first 2048 rows, all columns)
// The 4096 and 5120 cases keep every column tile but only 32 of the input groups, to hold
// the simulation to minutes; the per-row behaviour (reuse within 256-column tiles) is the
// same for every group. Weights come from a hash of (row, column) shaped into a bell curve
// of 8-bit values, so no matrix is stored. The bench prints the reuse rate (share of
// products taken from the result cache) and the compute cycles against the cycles a lane
// with one multiplier and no reuse would need (one product per cycle), and requires the
// reuse rate to exceed 50%.
module tb_axllm_workloads;
  import axllm_pkg::*;
  localparam int L = 64, P = 4, SD = 64, TILE = P * SD;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic x_wr_en; logic [12:0] x_wr_addr; act_t x_wr_data;
  logic [12:0] cfg_rows, cfg_cols; logic start, busy, done;
  logic w_valid, w_ready; weight_t w_data [L][P];
  logic [12:0] y_rd_addr; acc_t y_rd_data;
  logic [31:0] cnt_hit, cnt_mul, cnt_stall, cnt_load_cyc, cnt_run_cyc, cnt_drain_cyc;

  axllm_top dut (.*);

  int checks = 0, failures = 0;
  act_t X [5120];
  int seed;

  function automatic weight_t wgen(input int r, input int c);
    int unsigned h; int v;
    h = 32'(r) * 32'h9E3779B1 ^ 32'(c) * 32'h85EBCA77 ^ 32'(seed) * 32'hC2B2AE3D;
    h ^= h >> 15; h *= 32'h2C1B3C6D; h ^= h >> 12; h *= 32'h297A2D39; h ^= h >> 15;
    if (h[31:24] == 8'h00) return weight_t'(-128);
    v = int'(h[5:0]) + int'(h[11:6]) + int'(h[17:12]) + int'(h[23:18]) - 126;
    return weight_t'(v);
  endfunction

  initial begin
    repeat (20000000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int rows, input int cols, input string name);
    int groups, h0, m0, s0, r0, bad;
    real reuse, base;
    groups = (rows + L - 1) / L;
    seed++;
    for (int r = 0; r < rows; r++) begin
      X[r] = act_t'($urandom);
      @(negedge clk); x_wr_en = 1; x_wr_addr = 13'(r); x_wr_data = X[r];
    end
    @(negedge clk); x_wr_en = 0;
    cfg_rows = 13'(rows); cfg_cols = 13'(cols); start = 1;
    h0 = int'(cnt_hit); m0 = int'(cnt_mul); s0 = int'(cnt_stall); r0 = int'(cnt_run_cyc);
    @(negedge clk); start = 0;
    for (int c0 = 0; c0 < cols; c0 += TILE) begin
      int tw; tw = (cols - c0 < TILE) ? cols - c0 : TILE;
      for (int g = 0; g < groups; g++) begin
        for (int k = 0; k < ((tw < SD) ? tw : SD); k++) begin
          for (int i = 0; i < L; i++)
            for (int s = 0; s < P; s++) begin
              int r, c; r = g * L + i; c = c0 + s * SD + k;
              w_data[i][s] = (r < rows && c - c0 < tw) ? wgen(r, c) : weight_t'(0);
            end
          w_valid = 1;
          while (!w_ready) @(negedge clk);
          @(negedge clk);
        end
        w_valid = 0;
      end
    end
    while (busy) @(negedge clk);
    bad = 0;
    for (int c = 0; c < cols; c++) begin
      longint ref_y; ref_y = 0;
      for (int r = 0; r < rows; r++) ref_y += longint'(X[r]) * longint'(wgen(r, c));
      y_rd_addr = 13'(c);
      @(negedge clk);
      checks++;
      if (y_rd_data !== acc_t'(ref_y)) begin
        failures++; bad++;
        if (bad < 5) $display("FAIL %s y[%0d] = %0d expected %0d", name, c, y_rd_data, ref_y);
      end
    end
    reuse = real'(int'(cnt_hit) - h0) / real'(rows * cols);
    base  = real'(groups) * real'(cols);   // one product per lane per cycle, no reuse
    $display("%-10s %4d x %4d: reuse %5.1f%%, compute %0d cycles (no-reuse lane: %0.0f), stall cycles %0d",
             name, rows, cols, 100.0 * reuse, int'(cnt_run_cyc) - r0, base, int'(cnt_stall) - s0);
    checks++;
    if (reuse < 0.5) begin failures++; $display("FAIL %s: reuse rate %f", name, reuse); end
    checks++;
    if (int'(cnt_hit) - h0 + int'(cnt_mul) - m0 != rows * cols) begin
      failures++; $display("FAIL %s: reuse + mult != rows*cols", name);
    end
  endtask

  initial begin
    x_wr_en = 0; x_wr_addr = 0; x_wr_data = 0; cfg_rows = 0; cfg_cols = 0; start = 0;
    w_valid = 0; y_rd_addr = 0; seed = 0;
    foreach (w_data[i, s]) w_data[i][s] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(1024, 1024, "bert-large");
    run(2048, 4096, "llama-7b");
    run(2048, 5120, "llama-13b");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
