// fp16_add: combinational FP16 adder/subtractor without subnormal numbers.
// sub = 1 computes a - b. Alignment shifter, leading-zero normaliser and
// round-to-nearest-even follow fp16_add_f in spidercam_pkg.
module fp16_add
  import spidercam_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  input  logic  sub,
  output fp16_t y
);
  assign y = fp16_add_f(a, {b[15] ^ sub, b[14:0]});
endmodule
