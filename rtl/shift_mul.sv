// shift_mul -- multiplier of a PE lane: feature value times virtual weight.
//
// A virtual weight is a signed power of two, so the product is formed by
// adding the weight's shift to the float exponent and xoring the sign bits;
// no multiplier is needed. Zero, denormal and underflowing values give a
// signed zero, exponent overflow gives infinity, Inf/NaN inputs pass through.
//
// Interface: v (fp32 feature), w (8-bit code {sign, 7-bit two's complement
// shift}) -> p (fp32 product). Timing: combinational.
//
// From the source design: products are shifts of 32-bit floats (the ShiftCNN
// approach). Own choice: the weight code and the zero/overflow rules.
module shift_mul
  import sfs_pkg::*;
(
  input  fp32_t  v,
  input  wcode_t w,
  output fp32_t  p
);
  always_comb p = fp_shift_mul(v, w);
endmodule
