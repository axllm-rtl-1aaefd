// tb_axllm_queue: self-checking test of the credit-fed FIFO. Random pushes and pops that
// respect the fill level are compared against a model queue; full and empty are checked
// every cycle, and simultaneous push/pop is exercised at every fill level.
module tb_axllm_queue;
  localparam int D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, empty, full;
  logic [7:0] wr_data, rd_data;
  axllm_queue #(.T(logic [7:0]), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  byte unsigned model [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; wr_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      checks++;
      if (empty !== (model.size() == 0) || full !== (model.size() == D)) begin
        failures++; $display("FAIL flags size=%0d empty=%0b full=%0b", model.size(), empty, full);
      end
      if (model.size() > 0) begin
        checks++;
        if (rd_data !== model[0]) begin failures++; $display("FAIL head %0h vs %0h", rd_data, model[0]); end
      end
      pop  = (model.size() > 0) && ($urandom_range(0, 1) == 1);
      push = ((model.size() < D) || pop) && ($urandom_range(0, 2) != 0);
      wr_data = 8'($urandom);
      @(posedge clk); #1;
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(wr_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
