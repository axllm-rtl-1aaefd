// tb_axllm_outbuf_slice: self-checking test of an Out_buff slice with its P+1 queues.
//
// Five senders (four RC slices, one multiplier) push signed partial products under credit
// control. With `first` high a value replaces the stored sum, otherwise it is added. After
// each pass every entry is read through the drain port and compared with sums kept here.
// With all five queues busy the slice must retire one value per cycle.
module tb_axllm_outbuf_slice;
  import axllm_pkg::*;
  localparam int P = 4, D = 64, QD = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic first; logic [P:0] in_push, in_crd; out_req_t in_data [P+1];
  logic [ADDR_W-1:0] rd_addr; acc_t rd_data; logic busy;
  axllm_outbuf_slice #(.DEPTH(D), .P(P), .QDEPTH(QD)) dut (.*);

  int checks = 0, failures = 0;
  int cred [P+1];
  longint model [D];
  int now, nret;

  always @(posedge clk) now++;
  always @(posedge clk) if (rst_n) for (int k = 0; k <= P; k++) if (in_crd[k]) begin cred[k]++; nret++; end

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one pass: every address receives exactly one value (as in one weight row)
  task automatic pass(input bit f, output int cyc);
    int order [$]; int t0;
    for (int a = 0; a < D; a++) order.push_back(a);
    order.shuffle();
    first = f; nret = 0; t0 = now;
    while (order.size() > 0) begin
      in_push = '0;
      for (int k = 0; k <= P && order.size() > 0; k++)
        if (cred[k] > 0) begin
          int a, v;
          a = order.pop_front();
          v = $urandom_range(0, 65535) - 32768;
          in_data[k].addr = ADDR_W'(a);
          in_data[k].val  = prod_t'(v);
          model[a] = (f ? 0 : model[a]) + v;
          in_push[k] = 1; cred[k]--;
        end
      @(negedge clk);
    end
    in_push = '0;
    while (busy) @(negedge clk);
    cyc = now - t0;
    for (int a = 0; a < D; a++) begin
      rd_addr = ADDR_W'(a);
      @(negedge clk);
      checks++;
      if (rd_data !== acc_t'(model[a])) begin
        failures++; $display("FAIL addr %0d: %0d vs %0d", a, rd_data, model[a]);
      end
    end
  endtask

  initial begin
    int cyc;
    now = 0; first = 0; in_push = 0; rd_addr = 0;
    foreach (in_data[k]) in_data[k] = '0;
    foreach (cred[k]) cred[k] = QD;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    pass(1, cyc);
    checks++;
    if (cyc > D + 4) begin failures++; $display("FAIL rate: %0d cycles for %0d values", cyc, D); end
    for (int t = 0; t < 5; t++) pass(0, cyc);
    pass(1, cyc);
    pass(0, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
