// axllm_rr_arb: round-robin pointer over N requesters, used wherever several queues feed
// one consumer (an RC slice, the multiplier, an Out_buff slice).
//
// The grant goes to the first requester at or after the pointer. When `advance` is high
// (the granted request was served) the pointer moves to the requester after the grant.
// The grant is combinational; `gnt_valid` is low when nobody requests.
module axllm_rr_arb #(
  parameter int unsigned N = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [N-1:0]                  req,
  input  logic                          advance,
  output logic                          gnt_valid,
  output logic [(N>1?$clog2(N):1)-1:0]  gnt_idx
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] ptr;

  always_comb begin
    gnt_valid = 1'b0;
    gnt_idx   = '0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned j;
      j = (int'(ptr) + k) % N;
      if (!gnt_valid && req[j]) begin
        gnt_valid = 1'b1;
        gnt_idx   = IW'(j);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      ptr <= '0;
    else if (advance && gnt_valid)   ptr <= (gnt_idx == IW'(N - 1)) ? '0 : gnt_idx + 1'b1;
  end
endmodule
