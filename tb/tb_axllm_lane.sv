// tb_axllm_lane: self-checking test of one AxLLM lane at the paper's lane size
// (4 slices of 64 entries, 3-cycle multiplier).
//
// Each step loads a random weight row segment, starts the lane with a random x and, after
// done, compares every Out_buff column with sums computed here from the same numbers.
// Several steps accumulate (first = 0). Also checked: multiplications per step equal the
// number of distinct weight magnitudes (plus each -128, which is never cached), reuses
// equal the rest; a row whose slices use disjoint RC slices finishes in about 64 cycles
// (4 results per cycle), a row of one repeated value needs at least 256 cycles and
// produces pending-product stalls; an inactive lane reads back zero.
module tb_axllm_lane;
  import axllm_pkg::*;
  localparam int P = 4, SD = 64, BUF = P * SD, CB = $clog2(BUF + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ld_en; logic [ADDR_W-1:0] ld_addr; weight_t ld_data [P];
  logic start, active, first, done; act_t x_in; logic [CB-1:0] n_cols, rd_col;
  acc_t rd_data; logic [2:0] ev_hit, ev_miss, ev_stall;

  axllm_lane #(.P(P), .SLICE_DEPTH(SD)) dut (.*);

  int checks = 0, failures = 0;
  longint ref_acc [BUF];
  weight_t w [BUF];
  int hits, muls, stalls, cyc;

  always @(posedge clk) begin
    hits   += int'(ev_hit);
    muls   += int'(ev_miss);
    stalls += int'(ev_stall);
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic load_row();
    for (int k = 0; k < SD; k++) begin
      @(negedge clk);
      ld_en = 1; ld_addr = ADDR_W'(k);
      for (int s = 0; s < P; s++) ld_data[s] = w[s*SD + k];
    end
    @(negedge clk); ld_en = 0;
  endtask

  // run one step; returns the cycles from start to done
  task automatic run_step(input act_t x, input int n, input bit f, input bit act);
    int distinct; bit seen [129];
    @(negedge clk);
    x_in = x; n_cols = CB'(n); first = f; active = act; start = 1;
    hits = 0; muls = 0; stalls = 0;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    if (!act) return;
    foreach (seen[i]) seen[i] = 0;
    distinct = 0;
    for (int c = 0; c < n; c++) begin
      int m; m = (w[c] < 0) ? -int'(w[c]) : int'(w[c]);
      if (m == 128) distinct++;
      else if (!seen[m]) begin seen[m] = 1; distinct++; end
      ref_acc[c] = (f ? 0 : ref_acc[c]) + longint'(x) * longint'(w[c]);
    end
    check("multiplications", muls, distinct);
    check("reuses", hits, n - distinct);
  endtask

  task automatic check_out(input int n, input bit zero);
    for (int c = 0; c < n; c++) begin
      @(negedge clk); rd_col = CB'(c);
      @(negedge clk);
      check($sformatf("col %0d", c), rd_data, zero ? 0 : ref_acc[c]);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ld_en = 0; ld_addr = 0; start = 0; active = 0; first = 0; x_in = 0; n_cols = 0; rd_col = 0;
    foreach (ld_data[i]) ld_data[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1) random rows, accumulated over 4 steps, including -128 and 0
    for (int step = 0; step < 4; step++) begin
      for (int c = 0; c < BUF; c++) begin
        int r; r = $urandom_range(0, 99);
        if (r < 3) w[c] = -128;
        else if (r < 60) w[c] = weight_t'($urandom_range(0, 15) - 8);   // heavy repetition
        else w[c] = weight_t'($urandom);
      end
      load_row();
      run_step(act_t'($urandom), BUF, step == 0, 1);
      check_out(BUF, 0);
    end

    // 2) no collisions: slice s uses only magnitudes owned by RC slice s, one value each
    for (int c = 0; c < BUF; c++) w[c] = weight_t'((c / SD) * 32 + 5);
    load_row();
    run_step(act_t'(-77), BUF, 1, 1);
    check_out(BUF, 0);
    checks++;
    if (cyc > SD + 20) begin failures++; $display("FAIL parallel rate: %0d cycles", cyc); end
    $display("no-collision row: %0d cycles for %0d weights", cyc, BUF);

    // 3) worst case: every weight the same -> one RC slice serves all, with stalls
    for (int c = 0; c < BUF; c++) w[c] = 7;
    load_row();
    run_step(act_t'(3), BUF, 1, 1);
    check_out(BUF, 0);
    checks++;
    if (cyc < BUF) begin failures++; $display("FAIL serial rate: %0d cycles", cyc); end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no pending-product stall seen"); end
    $display("single-value row: %0d cycles, %0d stall cycles", cyc, stalls);

    // 4) short segment (tile narrower than the buffer), then an inactive lane
    for (int c = 0; c < BUF; c++) w[c] = weight_t'($urandom);
    load_row();
    run_step(act_t'(100), 150, 1, 1);
    check_out(150, 0);
    run_step(act_t'(1), 150, 1, 0);
    check_out(8, 1);

    // 5) single first-occurrence latency: start -> done
    for (int c = 0; c < BUF; c++) w[c] = 9;
    load_row();
    run_step(act_t'(2), 1, 1, 1);
    check_out(1, 0);
    $display("single weight latency: %0d cycles", cyc);
    checks++;
    if (cyc > 11) begin failures++; $display("FAIL latency %0d", cyc); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
