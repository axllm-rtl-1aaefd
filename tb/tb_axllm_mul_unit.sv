// tb_axllm_mul_unit: self-checking test of a lane's multiplier with its four input queues.
//
// Requests with random magnitudes, signs and source slices are pushed from four RC-slice
// queues under credit control. Each must come back once: written into the RC slice that
// sent it (|u|*X, not for -128) and delivered, signed, to the Out_buff slice it came from.
// A lone request pushed in cycle t is seen on the outputs at the edge ending cycle t+5:
// one cycle to enter the queue, one to be issued, then the paper's 3-cycle multiplier.
// With all queues full the unit must
// issue one multiplication per cycle.
module tb_axllm_mul_unit;
  import axllm_pkg::*;
  localparam int P = 4, QD = 4, LAT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  act_t x; logic [P-1:0] in_push, in_crd; mul_req_t in_data [P];
  logic [P-1:0] rc_wr_en; logic [IDX_W-1:0] rc_wr_idx; prod_t rc_wr_val;
  logic [P-1:0] out_valid, out_crd; out_req_t out_data; logic busy;
  axllm_mul_unit #(.P(P), .QDEPTH(QD), .LAT(LAT)) dut (.*);

  int checks = 0, failures = 0;
  int cred [P], oq [P];
  int expect_v [int];   // key: src*1024+addr -> signed value
  int expect_r [int];   // key -> rc slice
  int expect_m [int];   // key -> magnitude
  int nout, first_out;
  int now;
  bit sink_fast;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  always @(posedge clk) now++;
  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < P; r++) if (in_crd[r]) cred[r]++;
    for (int s = 0; s < P; s++) if (out_crd[s]) oq[s]--;
    if (out_valid != 0) begin
      int s, key;
      s = $clog2(out_valid);
      key = s * 1024 + int'(out_data.addr);
      nout++;
      if (first_out < 0) first_out = now;
      oq[s]++;
      checks++;
      if (oq[s] > QD) begin failures++; $display("FAIL out queue overrun"); end
      checks++;
      if (!expect_v.exists(key)) begin failures++; $display("FAIL unknown result"); end
      else begin
        check("product", out_data.val, expect_v[key]);
        if (expect_m[key] != 128) begin
          check("rc write slice", rc_wr_en, 1 << expect_r[key]);
          check("rc write value", rc_wr_val, expect_m[key] * x);
          check("rc write idx", rc_wr_idx, expect_m[key]);
        end else check("no rc write for -128", rc_wr_en, 0);
        expect_v.delete(key);
      end
    end
  end
  always @(negedge clk)
    for (int s = 0; s < P; s++) out_crd[s] = (oq[s] > 0) && (sink_fast || $urandom_range(0, 2) == 0);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int addr_ctr;
  task automatic send(input int r, input int s, input int m, input bit ng);
    int key;
    key = s * 1024 + addr_ctr;
    in_data[r].key.idx = IDX_W'(m % 128);
    in_data[r].key.neg = ng;
    in_data[r].key.nocache = (m == 128);
    in_data[r].addr = ADDR_W'(addr_ctr);
    in_data[r].src  = SL_W'(s);
    expect_v[key] = (ng ? -1 : 1) * m * int'(x);
    expect_r[key] = r;
    expect_m[key] = m;
    addr_ctr = (addr_ctr + 1) % 1024;
    in_push[r] = 1; cred[r]--;
  endtask

  initial begin
    int t0, cyc;
    now = 0; in_push = 0; out_crd = 0; x = 0; nout = 0; addr_ctr = 0; sink_fast = 1;
    foreach (in_data[r]) in_data[r] = '0;
    foreach (cred[r]) begin cred[r] = QD; oq[r] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;

    // latency of a lone request
    @(negedge clk); x = act_t'(-25); first_out = -1;
    send(2, 1, 77, 1); t0 = now;
    @(negedge clk); in_push = 0;
    while (first_out < 0) @(negedge clk);
    check("latency", first_out - t0, 2 + LAT);

    // throughput: 64 requests, queues kept full, fast sink
    repeat (5) @(negedge clk);
    x = act_t'(91); nout = 0; t0 = now;
    for (int n = 0; n < 64; ) begin
      in_push = 0;
      for (int r = 0; r < P; r++)
        if (cred[r] > 0 && n < 64) begin send(r, n % P, $urandom_range(0, 127), $urandom_range(0, 1)); n++; end
      @(negedge clk);
    end
    in_push = 0;
    while (nout < 64) @(negedge clk);
    cyc = now - t0;
    checks++;
    if (cyc > 64 + LAT + 4) begin failures++; $display("FAIL throughput %0d cycles", cyc); end

    // random traffic, slow sink, -128 included
    repeat (5) @(negedge clk);
    sink_fast = 0; x = act_t'($urandom); nout = 0;
    for (int n = 0; n < 300; ) begin
      in_push = 0;
      for (int r = 0; r < P; r++)
        if (cred[r] > 0 && n < 300 && $urandom_range(0, 1) == 1) begin
          int m; m = ($urandom_range(0, 9) == 0) ? 128 : $urandom_range(0, 127);
          send(r, $urandom_range(0, P - 1), m, (m == 128) ? 1 : $urandom_range(0, 1)); n++;
        end
      @(negedge clk);
    end
    in_push = 0;
    while (nout < 300) @(negedge clk);
    repeat (5) @(negedge clk);
    check("all results delivered", expect_v.size(), 0);
    check("idle", busy, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
