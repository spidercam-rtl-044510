// fp16_div: combinational FP16 divider without subnormal numbers. The mantissa
// quotient lies in (1/2, 2), so its leading one is in one of two known bits.
// Division by zero gives infinity. One divider is used per pixel (Z' = C / D).
module fp16_div
  import spidercam_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);
  assign y = fp16_div_f(a, b);
endmodule
