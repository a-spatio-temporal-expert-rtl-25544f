// stmoe_pkg: types, constants and small arithmetic helpers shared by the
// spatio-temporal expert-prefetching MoE accelerator.
//
// Numbers: all operands are bfloat16 (1 sign, 8 exponent, 7 mantissa bits).
// Products are formed exactly and accumulated in IEEE single precision, then
// truncated back to bfloat16 when a result leaves a PE.  Subnormals are
// flushed to zero and rounding is truncation (this design's choice; the paper
// only says the MAC units use BF16 arithmetic).
//
// Geometry defaults follow the paper's main configuration: K = 8 PEs, each a
// 64 x 64 MAC array, a 512 x 8 router array, a 256-entry CCT with 8
// candidates of (8-bit index + 2-bit confidence).  A "line" is one row of a
// PE array: 64 bfloat16 words, 1024 bits.
package stmoe_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_DIM      = 64;   // PE MAC array is N_DIM x N_DIM
  localparam int unsigned NUM_PE     = 8;    // K PEs, one per selected expert
  localparam int unsigned TOPK_MAX   = 8;    // largest top-K the hardware holds
  localparam int unsigned EXP_W      = 8;    // expert index width (256-entry CCT)
  localparam int unsigned MAX_EXP    = 1 << EXP_W;
  localparam int unsigned CONF_W     = 2;    // confidence score width
  localparam int unsigned LINE_W     = N_DIM * 16;

  typedef logic [15:0] bf16_t;
  typedef logic [31:0] fp32_t;
  typedef logic [EXP_W-1:0] expert_t;
  typedef logic [CONF_W-1:0] conf_t;

  // 2-bit confidence states of the CCT and HT
  localparam conf_t CONF_STRONG_NOT = 2'b00;
  localparam conf_t CONF_WEAK_NOT   = 2'b01;
  localparam conf_t CONF_WEAK_PREF  = 2'b10;   // initial value and threshold
  localparam conf_t CONF_STRONG     = 2'b11;

  // One candidate of a CCT row / one HT entry: 10 bits
  typedef struct packed {
    expert_t idx;
    conf_t   conf;
  } cand_t;

  // PE dataflow
  typedef enum logic {DF_WS = 1'b0, DF_IS = 1'b1} dataflow_e;

  // ------------------------------------------------- floating-point helpers
  // bfloat16 -> fp32 (exact)
  function automatic fp32_t bf16_to_fp32(bf16_t a);
    return {a, 16'h0000};
  endfunction

  // fp32 -> bfloat16 (truncate)
  function automatic bf16_t fp32_to_bf16(fp32_t a);
    return a[31:16];
  endfunction

  // Exact product of two bfloat16 numbers as fp32 (8x8-bit mantissa product
  // fits the 24-bit fp32 significand).  Subnormal inputs count as zero;
  // overflow saturates to infinity, underflow flushes to zero.
  function automatic fp32_t bf16_mul(bf16_t a, bf16_t b);
    logic        s;
    logic [15:0] m;
    int          e;
    fp32_t       r;
    s = a[15] ^ b[15];
    if (a[14:7] == 8'd0 || b[14:7] == 8'd0) return {s, 31'd0};
    m = {1'b1, a[6:0]} * {1'b1, b[6:0]};
    e = int'(a[14:7]) + int'(b[14:7]) - 127;
    if (m[15]) begin
      e = e + 1;
      r = {s, 8'd0, m[14:0], 8'd0};
    end else begin
      r = {s, 8'd0, m[13:0], 9'd0};
    end
    if (e <= 0)   return {s, 31'd0};
    if (e >= 255) return {s, 8'hff, 23'd0};
    r[30:23] = 8'(e);
    return r;
  endfunction

  // fp32 addition, truncating, subnormals flushed to zero.  Written with
  // narrow shift amounts and a loop-free normalisation so that it maps to a
  // compact adder, two shifters and a leading-zero counter.
  function automatic fp32_t fp32_add(fp32_t a, fp32_t b);
    fp32_t       big, sml;
    logic [26:0] mb, ms;     // 1 hidden + 23 frac + 3 guard bits
    logic [27:0] sum;
    logic [7:0]  d;
    logic [4:0]  lz;
    logic [8:0]  eb;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? 32'd0 : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin big = a; sml = b; end
    else                    begin big = b; sml = a; end
    d  = big[30:23] - sml[30:23];
    mb = {1'b1, big[22:0], 3'b000};
    ms = (d > 8'd26) ? 27'd0 : ({1'b1, sml[22:0], 3'b000} >> d[4:0]);
    if (big[31] == sml[31]) sum = {1'b0, mb} + {1'b0, ms};
    else                    sum = {1'b0, mb} - {1'b0, ms};
    lz = 5'd0;
    for (int i = 0; i < 27; i++) if (sum[i]) lz = 5'(26 - i);
    eb = {1'b0, big[30:23]};
    if (sum == 28'd0) return 32'd0;
    if (sum[27]) begin
      sum = sum >> 1;
      eb  = eb + 9'd1;
    end else begin
      sum = sum << lz;
      if ({4'd0, lz} >= eb) return 32'd0;
      eb  = eb - {4'd0, lz};
    end
    if (eb >= 9'd255) return {big[31], 8'hff, 23'd0};
    return {big[31], eb[7:0], sum[25:3]};
  endfunction

  // Map an fp32 bit pattern to an unsigned key that orders like the value.
  function automatic logic [31:0] fp32_key(fp32_t a);
    return a[31] ? ~a : (a | 32'h8000_0000);
  endfunction

endpackage
