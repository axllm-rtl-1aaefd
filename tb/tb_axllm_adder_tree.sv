// tb_axllm_adder_tree: self-checking test of the 64-input pipelined adder tree. A new
// random column enters every cycle (some cycles idle); each total must leave exactly
// log2(64) = 6 cycles later with its tag. A 5-input tree checks the zero padding.
module tb_axllm_adder_tree;
  import axllm_pkg::*;
  localparam int N = 64, N2 = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid, in_valid2, out_valid2;
  logic [15:0] in_tag, out_tag, in_tag2, out_tag2;
  acc_t in_data [N], out_data, in_data2 [N2], out_data2;
  axllm_adder_tree #(.N(N),  .TAG_W(16)) dut  (.clk, .rst_n, .in_valid, .in_tag, .in_data, .out_valid, .out_tag, .out_data);
  axllm_adder_tree #(.N(N2), .TAG_W(16)) dut2 (.clk, .rst_n, .in_valid(in_valid2), .in_tag(in_tag2),
    .in_data(in_data2), .out_valid(out_valid2), .out_tag(out_tag2), .out_data(out_data2));

  int checks = 0, failures = 0, now = 0;
  longint exp_sum [int], exp_sum2 [int];
  int sent_at [int];

  always @(posedge clk) now++;
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      checks++;
      if (!exp_sum.exists(int'(out_tag)) || out_data !== acc_t'(exp_sum[int'(out_tag)])
          || now - sent_at[int'(out_tag)] != 6) begin
        failures++; $display("FAIL tag %0d", out_tag);
      end
      exp_sum.delete(int'(out_tag));
    end
    if (out_valid2) begin
      checks++;
      if (out_data2 !== acc_t'(exp_sum2[int'(out_tag2)])) begin failures++; $display("FAIL small tree"); end
      exp_sum2.delete(int'(out_tag2));
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_tag = 0; in_valid2 = 0; in_tag2 = 0;
    foreach (in_data[i]) in_data[i] = 0;
    foreach (in_data2[i]) in_data2[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      in_tag = 16'(t);
      in_valid2 = in_valid; in_tag2 = 16'(t);
      begin
        longint s, s2; s = 0; s2 = 0;
        foreach (in_data[i]) begin
          in_data[i] = acc_t'($urandom_range(0, 2000000) - 1000000);
          s += in_data[i];
        end
        foreach (in_data2[i]) begin in_data2[i] = in_data[i]; s2 += in_data[i]; end
        if (in_valid) begin exp_sum[t] = s; exp_sum2[t] = s2; sent_at[t] = now + 1; end
      end
    end
    @(negedge clk); in_valid = 0; in_valid2 = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_sum.size() != 0 || exp_sum2.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
