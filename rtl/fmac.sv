// fmac: one floating-point multiply-accumulate unit, acc_out = acc_in + a * b.
//
// The paper sizes the per-plane logic in FMACs; their format is this design's choice:
// two BF16 operands are multiplied exactly into FP32 and added to an FP32
// accumulator with round-toward-zero, denormals flushed to zero (see kvnand_pkg).
// Purely combinational; the caller registers the accumulator.
module fmac
  import kvnand_pkg::*;
(
  input  bf16_t a,
  input  bf16_t b,
  input  fp32_t acc_in,
  output fp32_t acc_out
);
  always_comb acc_out = fp32_add(acc_in, bf16_mul(a, b));
endmodule
