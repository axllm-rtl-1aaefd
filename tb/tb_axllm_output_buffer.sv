// tb_axllm_output_buffer: self-checking test of the global output buffer at its full size
// (5120 words). Random writes (with overwrites) are compared against a model on reads,
// which return the word one cycle after the address.
module tb_axllm_output_buffer;
  import axllm_pkg::*;
  localparam int Y_LEN = 5120;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en; logic [12:0] wr_addr, rd_addr; acc_t wr_data, rd_data;
  axllm_output_buffer #(.Y_LEN(Y_LEN)) dut (.*);

  int checks = 0, failures = 0;
  acc_t model [Y_LEN];

  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_addr = 0; wr_data = 0; rd_addr = 0;
    for (int a = 0; a < Y_LEN; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 13'(a); wr_data = acc_t'($urandom); model[a] = wr_data;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk); wr_addr = 13'($urandom_range(0, Y_LEN - 1)); wr_data = acc_t'($urandom);
      model[wr_addr] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int a = 0; a < Y_LEN; a++) begin
      rd_addr = 13'(a);
      @(negedge clk);
      checks++;
      if (rd_data !== model[a]) begin failures++; $display("FAIL y[%0d]", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
