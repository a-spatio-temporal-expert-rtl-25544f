// bf16_mac: one multiply-accumulate unit of the MAC arrays.
//
// acc_out = acc_in + a * b, where a and b are bfloat16 and the accumulator is
// IEEE single precision.  The product is exact; the addition truncates and
// flushes subnormals to zero (see stmoe_pkg).  Purely combinational: the
// systolic array and the router array put their own pipeline registers
// around it.
//
// The paper states only that all MAC units use BF16 arithmetic; the fp32
// accumulator, truncation and flush-to-zero are this design's choices.
module bf16_mac
  import stmoe_pkg::*;
(
  input  bf16_t a,
  input  bf16_t b,
  input  fp32_t acc_in,
  output fp32_t acc_out
);
  always_comb acc_out = fp32_add(acc_in, bf16_mul(a, b));
endmodule
