// tb_axllm_wbuf_slice: self-checking test of a W_buff slice and its fetch stage.
//
// Random weights are loaded; after start every weight must leave exactly once, in address
// order, towards the RC slice that owns its magnitude (|w| / 32 for 4 slices), with the
// right key (|w|, sign, uncacheable for -128) and address. The sink models the RC input
// queues: it pops at random and returns credits; a push into a full model queue is a
// credit violation. With a sink that pops every cycle the slice must sustain one weight
// per cycle.
module tb_axllm_wbuf_slice;
  import axllm_pkg::*;
  localparam int P = 4, D = 64, QD = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ld_en; logic [ADDR_W-1:0] ld_addr; weight_t ld_data;
  logic start; logic [ADDR_W:0] n_valid; logic busy;
  logic [P-1:0] req_valid, crd_ret; rc_req_t req_data;
  axllm_wbuf_slice #(.DEPTH(D), .P(P), .QDEPTH(QD)) dut (.*);

  int checks = 0, failures = 0;
  weight_t w [D];
  rc_req_t q [P][$];
  int got_addr [$];
  int pop_pct;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // sink: capture pushes, pop randomly, return credits
  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < P; r++) begin
      if (crd_ret[r]) void'(q[r].pop_front());
      if (req_valid[r]) begin
        int m; weight_t ww;
        checks++;
        if (q[r].size() >= QD) begin failures++; $display("FAIL queue %0d overrun", r); end
        q[r].push_back(req_data);
        ww = w[req_data.addr];
        m  = (ww < 0) ? -int'(ww) : int'(ww);
        check("order", req_data.addr, got_addr.size());
        got_addr.push_back(int'(req_data.addr));
        check("key.idx", req_data.key.idx, m % 128);
        check("key.neg", req_data.key.neg, ww < 0);
        check("key.nocache", req_data.key.nocache, m == 128);
        check("dest", r, (m % 128) / 32);
      end
    end
  end
  always @(negedge clk) begin
    for (int r = 0; r < P; r++) crd_ret[r] = (q[r].size() > 0) && ($urandom_range(0, 99) < pop_pct);
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int n, input int pct, output int cyc);
    pop_pct = pct;
    got_addr.delete();
    @(negedge clk); start = 1; n_valid = (ADDR_W+1)'(n);
    @(negedge clk); start = 0; cyc = 1;
    while (busy) begin @(negedge clk); cyc++; end
    check("count", got_addr.size(), n);
    repeat (10) @(negedge clk);
  endtask

  initial begin
    int cyc;
    ld_en = 0; ld_addr = 0; ld_data = 0; start = 0; n_valid = 0; crd_ret = 0; pop_pct = 100;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      for (int k = 0; k < D; k++) begin
        w[k] = (k % 17 == 3) ? weight_t'(-128) : weight_t'($urandom);
        @(negedge clk); ld_en = 1; ld_addr = ADDR_W'(k); ld_data = w[k];
      end
      @(negedge clk); ld_en = 0;
      run((t == 5) ? 37 : D, (t < 2) ? 100 : 30, cyc);
      if (t < 2) begin
        checks++;
        if (cyc > D + 3) begin failures++; $display("FAIL rate: %0d cycles for %0d", cyc, D); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
