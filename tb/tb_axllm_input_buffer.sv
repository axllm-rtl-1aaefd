// tb_axllm_input_buffer: self-checking test of the input vector buffer at its full size
// (5120 elements, 64 per group). The whole vector is written in random order, then every
// group is read and each of its 64 elements compared, one cycle after the group address.
module tb_axllm_input_buffer;
  import axllm_pkg::*;
  localparam int X_LEN = 5120, L = 64, G = X_LEN / L;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en; logic [12:0] wr_addr; act_t wr_data; logic [6:0] rd_group; act_t rd_data [L];
  axllm_input_buffer #(.X_LEN(X_LEN), .L(L)) dut (.*);

  int checks = 0, failures = 0;
  act_t model [X_LEN];

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order [$];
    wr_en = 0; wr_addr = 0; wr_data = 0; rd_group = 0;
    for (int a = 0; a < X_LEN; a++) begin order.push_back(a); model[a] = act_t'($urandom); end
    order.shuffle();
    foreach (order[n]) begin
      @(negedge clk); wr_en = 1; wr_addr = 13'(order[n]); wr_data = model[order[n]];
    end
    @(negedge clk); wr_en = 0;
    for (int g = 0; g < G; g++) begin
      rd_group = 7'(g);
      @(negedge clk);
      for (int i = 0; i < L; i++) begin
        checks++;
        if (rd_data[i] !== model[g*L+i]) begin failures++; $display("FAIL x[%0d]", g*L+i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
