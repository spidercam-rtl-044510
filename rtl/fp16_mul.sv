// fp16_mul: combinational FP16 multiplier without subnormal numbers. With both
// hidden bits known to be one, the 22-bit mantissa product has its leading one
// in bit 21 or 20, so normalisation is a one-bit mux, not a shifter.
module fp16_mul
  import spidercam_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);
  assign y = fp16_mul_f(a, b);
endmodule
