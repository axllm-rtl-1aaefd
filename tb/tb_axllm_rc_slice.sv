// tb_axllm_rc_slice: self-checking test of one result-cache slice (32 entries, 4 source
// queues).
//
// The bench plays the four W_buff slices (credit counters per queue), a multiplier that
// answers each request after 3 cycles with |u|*X, and four Out_buff queues that pop at
// random. Every request must come out exactly once: as a multiplier request the first
// time its magnitude is met (and always for -128), as a reuse (value +-|u|*X, sent to the
// slice it came from) every later time. A repeated magnitude that arrives while its
// product is still in the multiplier must stall the slice. `clear` must forget all entries.
module tb_axllm_rc_slice;
  import axllm_pkg::*;
  localparam int P = 4, E = 32, QD = 4, LAT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear; logic [P-1:0] in_push, in_crd; rc_req_t in_data [P];
  logic mreq_valid, mreq_crd; mul_req_t mreq_data;
  logic wr_en; logic [IDX_W-1:0] wr_idx; prod_t wr_val;
  logic [P-1:0] hit_valid, hit_crd; out_req_t hit_data;
  logic busy, ev_hit, ev_miss, ev_stall;
  axllm_rc_slice #(.P(P), .ENTRIES(E), .QDEPTH(QD)) dut (.*);

  int checks = 0, failures = 0;
  int X;
  int src_cred [P];
  int hq [P];            // occupancy of the modelled Out_buff queues
  bit seen [E];
  int nhit, nmiss, nstall, nreq;
  mul_req_t mpipe [$];   // multiplier model
  int       mdue  [$];
  int now;

  // expected magnitude and sign of each (src, addr)
  int mag_of [P][64];
  bit neg_of [P][64];
  bit done_of [P][64];

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  always @(posedge clk) now++;

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < P; s++) if (in_crd[s]) src_cred[s]++;
    nstall += int'(ev_stall);
    if (mreq_valid) begin
      int m; m = mreq_data.key.nocache ? 128 : int'(mreq_data.key.idx);
      nmiss++;
      check("miss key", m, mag_of[mreq_data.src][mreq_data.addr]);
      if (!mreq_data.key.nocache) begin
        checks++;
        if (seen[m % E]) begin failures++; $display("FAIL second multiplication of %0d", m); end
        seen[m % E] = 1;
      end
      checks++;
      if (done_of[mreq_data.src][mreq_data.addr]) begin failures++; $display("FAIL duplicate"); end
      done_of[mreq_data.src][mreq_data.addr] = 1;
      mpipe.push_back(mreq_data); mdue.push_back(now + LAT);
    end
    for (int d = 0; d < P; d++) begin
      if (hit_crd[d]) hq[d]--;
      if (hit_valid[d]) begin
        int m, v;
        nhit++;
        hq[d]++;
        checks++;
        if (hq[d] > QD) begin failures++; $display("FAIL out queue overrun"); end
        m = mag_of[d][hit_data.addr];
        v = (neg_of[d][hit_data.addr] ? -1 : 1) * m * X;
        check("hit value", hit_data.val, v);
        checks++;
        if (done_of[d][hit_data.addr]) begin failures++; $display("FAIL duplicate hit"); end
        done_of[d][hit_data.addr] = 1;
      end
    end
  end

  // multiplier model and credit/pop behaviour
  always @(negedge clk) begin
    wr_en = 0; mreq_crd = 0;
    if (mdue.size() > 0 && mdue[0] <= now) begin
      mul_req_t r; r = mpipe.pop_front(); void'(mdue.pop_front());
      mreq_crd = 1;
      if (!r.key.nocache) begin wr_en = 1; wr_idx = r.key.idx; wr_val = prod_t'(int'(r.key.idx) * X); end
    end
    for (int d = 0; d < P; d++) hit_crd[d] = (hq[d] > 0) && ($urandom_range(0, 3) != 0);
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_row(input int n, input bit burst);
    int sent [P];
    foreach (seen[i]) seen[i] = 0;
    foreach (done_of[s, a]) done_of[s][a] = 0;
    foreach (sent[s]) sent[s] = 0;
    nhit = 0; nmiss = 0; nstall = 0;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    while (sent[0] < n || sent[1] < n || sent[2] < n || sent[3] < n) begin
      in_push = '0;
      for (int s = 0; s < P; s++) begin
        if (sent[s] < n && src_cred[s] > 0 && $urandom_range(0, 1) == 1) begin
          int m; bit ng;
          m  = burst ? 3 : ($urandom_range(0, 40) == 0 ? 128 : $urandom_range(0, 7));
          ng = (m == 128) ? 1 : $urandom_range(0, 1);
          mag_of[s][sent[s]] = m; neg_of[s][sent[s]] = ng;
          in_data[s].key.idx = IDX_W'(m % 128);
          in_data[s].key.neg = ng;
          in_data[s].key.nocache = (m == 128);
          in_data[s].addr = ADDR_W'(sent[s]);
          in_push[s] = 1; src_cred[s]--; sent[s]++;
        end
      end
      @(negedge clk);
    end
    in_push = '0;
    repeat (40) @(negedge clk);
    check("all resolved", nhit + nmiss, P * n);
  endtask

  initial begin
    now = 0; clear = 0; in_push = 0; mreq_crd = 0; wr_en = 0; wr_idx = 0; wr_val = 0; hit_crd = 0;
    foreach (in_data[s]) in_data[s] = '0;
    foreach (src_cred[s]) src_cred[s] = QD;
    foreach (hq[d]) hq[d] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 5; t++) begin
      X = $urandom_range(0, 255) - 128;
      run_row(60, 0);
    end
    X = 11;
    run_row(20, 1);
    checks++;
    if (nstall == 0) begin failures++; $display("FAIL no stall on a pending product"); end
    check("one multiplication", nmiss, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
