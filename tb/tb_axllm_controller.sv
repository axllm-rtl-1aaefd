// tb_axllm_controller: self-checking test of the tile / input-group sequencer with small
// sizes (4 lanes, 2 slices of 4 entries: tiles of 8 columns).
//
// The lanes are modelled by a `lanes_done` that drops for a random time after each
// lane_start; the weight stream has random gaps. For several (rows, cols) pairs the bench
// works out the expected sequence itself and checks: the number of weight beats per step
// (min(4, tile width)) and their addresses, the input group and the active lanes of every
// step, `first` only on a tile's first group, the tile width, drain tags covering every
// output column once in order, and a single done pulse at the end.
module tb_axllm_controller;
  import axllm_pkg::*;
  localparam int L = 4, P = 2, SD = 4, X_LEN = 16, Y_LEN = 32, TILE = P * SD;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, w_valid, w_ready, ld_en, lane_start, lane_first, lanes_done;
  logic [4:0] cfg_rows; logic [5:0] cfg_cols;
  logic [1:0] x_group; logic [ADDR_W-1:0] ld_addr; logic [L-1:0] lane_active;
  logic [3:0] lane_ncols, rd_col; logic tree_valid; logic [4:0] tree_tag;
  logic ev_load, ev_run, ev_drain;
  axllm_controller #(.L(L), .P(P), .SLICE_DEPTH(SD), .X_LEN(X_LEN), .Y_LEN(Y_LEN), .TREE_LAT(2)) dut (.*);

  int checks = 0, failures = 0;
  int beats, nsteps, ndone, busy_lanes;
  int tags [$];

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // lane model
  always @(posedge clk) begin
    if (lane_start) busy_lanes <= $urandom_range(1, 6);
    else if (busy_lanes > 0) busy_lanes <= busy_lanes - 1;
  end
  assign lanes_done = (busy_lanes == 0);

  always @(negedge clk) w_valid = ($urandom_range(0, 2) != 0);

  int exp_beats [$], exp_group [$], exp_first [$], exp_tw [$], exp_act [$];
  always @(posedge clk) if (rst_n) begin
    if (ld_en) begin check("ld_addr", ld_addr, beats); beats++; end
    if (ld_en) check("w_ready with ld_en", w_ready, 1);
    if (lane_start) begin
      check("beats before start", beats, exp_beats[nsteps]);
      check("group", x_group, exp_group[nsteps]);
      check("first", lane_first, exp_first[nsteps]);
      check("tile width", lane_ncols, exp_tw[nsteps]);
      check("active lanes", lane_active, exp_act[nsteps]);
      beats = 0; nsteps++;
    end
    if (tree_valid) tags.push_back(int'(tree_tag));
    if (done) ndone++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int rows, input int cols);
    int c0, groups;
    exp_beats.delete(); exp_group.delete(); exp_first.delete(); exp_tw.delete(); exp_act.delete();
    tags.delete(); beats = 0; nsteps = 0; ndone = 0;
    groups = (rows + L - 1) / L;
    for (c0 = 0; c0 < cols; c0 += TILE) begin
      int tw; tw = (cols - c0 < TILE) ? cols - c0 : TILE;
      for (int g = 0; g < groups; g++) begin
        int act; act = 0;
        for (int i = 0; i < L; i++) if (g * L + i < rows) act |= 1 << i;
        exp_beats.push_back(tw < SD ? tw : SD);
        exp_group.push_back(g); exp_first.push_back(g == 0);
        exp_tw.push_back(tw); exp_act.push_back(act);
      end
    end
    @(negedge clk); cfg_rows = 5'(rows); cfg_cols = 6'(cols); start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    check("steps", nsteps, exp_group.size());
    check("done pulses", ndone, 1);
    check("drained columns", tags.size(), (rows > 0) ? cols : 0);
    foreach (tags[n]) check("drain order", tags[n], n);
  endtask

  initial begin
    start = 0; cfg_rows = 0; cfg_cols = 0; busy_lanes = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    run(10, 20);
    run(16, 32);
    run(3, 5);
    run(4, 8);
    run(13, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
