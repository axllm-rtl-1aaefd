// axllm_pkg: types and constants shared by the AxLLM computation-reuse accelerator.
//
// The defaults follow the main configuration of the paper's evaluation: 8-bit signed
// weights and inputs, a 128-entry result cache (RC) indexed by weight magnitude, 64 lanes,
// 256-entry weight/output buffers per lane split into four 64-entry slices, a 3-cycle
// multiplier. Widths of products and accumulators are this design's own choice.
package axllm_pkg;

  // Operand widths (paper: "quantized to 8-bit fixed-point signed numbers").
  localparam int unsigned W_W   = 8;            // weight width
  localparam int unsigned X_W   = 8;            // input (activation) width
  localparam int unsigned MAG_W = W_W;          // |w| fits 0..128 -> 8 bits
  localparam int unsigned IDX_W = W_W - 1;      // RC index: |w| for |w| < 128
  localparam int unsigned PROD_W = MAG_W + X_W + 1; // signed product of |w|*x, negatable
  localparam int unsigned ACC_W = 32;           // partial-sum / output accumulator width

  localparam int unsigned RC_ENTRIES = 1 << IDX_W; // 128 (paper Sec. V)

  typedef logic signed [W_W-1:0]    weight_t;
  typedef logic signed [X_W-1:0]    act_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Split a signed weight into the RC index and a sign. A weight and its negative share an
  // RC cell (paper Sec. V). -128 has no positive twin inside 7 bits: it is marked
  // uncacheable and always goes through the multiplier.
  typedef struct packed {
    logic [IDX_W-1:0] idx;    // |w| (low 7 bits)
    logic             neg;    // weight was negative: the cached |w|*x is negated
    logic             nocache;// w == -128: multiply, never cache
  } wkey_t;

  function automatic wkey_t weight_key(input weight_t w);
    wkey_t k;
    logic [W_W-1:0] mag;
    mag       = w[W_W-1] ? W_W'(-w) : W_W'(w);
    k.idx     = mag[IDX_W-1:0];
    k.neg     = w[W_W-1];
    k.nocache = mag[W_W-1];
    return k;
  endfunction

  // Magnitude of a key as a multiplier operand (0..128).
  function automatic logic [MAG_W-1:0] key_mag(input wkey_t k);
    return k.nocache ? MAG_W'(1 << IDX_W) : MAG_W'(k.idx);
  endfunction

  // Field widths of the request records that travel between buffer slices. They bound the
  // slice depth (<= 1024 entries) and the slice count (<= 16); modules assert the bounds.
  localparam int unsigned ADDR_W = 10;          // slice-local buffer address
  localparam int unsigned SL_W   = 4;           // slice number

  // W_buff slice -> RC slice queue: one weight to be resolved.
  typedef struct packed {
    wkey_t             key;
    logic [ADDR_W-1:0] addr;   // Out_buff slice-local address (same as W_buff address)
  } rc_req_t;

  // RC slice -> multiplier queue: a first occurrence (or an uncacheable weight).
  typedef struct packed {
    wkey_t             key;
    logic [ADDR_W-1:0] addr;
    logic [SL_W-1:0]   src;    // W_buff/Out_buff slice the weight came from
  } mul_req_t;

  // RC slice or multiplier -> Out_buff slice queue: a signed partial product.
  typedef struct packed {
    prod_t             val;
    logic [ADDR_W-1:0] addr;
  } out_req_t;

endpackage
