// sum_divide: joint depth and confidence from all scales.
//
//   C  = sum_N VW_N        (confidence, the numerator)
//   Z' = C / sum_N WW_N    (joint depth: one division per pixel)
// VW_N and WW_N already hold the weighted sums over the three derivative
// estimates of scale N, so this is the paper's sum over all 2 x 3 estimates.
// Combinational adders and divider, one output register: lag LAT_IN + 1.
// The paper's main text and algorithm use sum VW as confidence; one line of
// its supplement writes sum WW instead. This module follows the main text.
module sum_divide
  import spidercam_pkg::*;
#(
  parameter int NUM_SCALES = 2
) (
  input  logic  clk,
  input  logic  en,
  input  fp16_t vw [NUM_SCALES],
  input  fp16_t ww [NUM_SCALES],
  output fp16_t conf,
  output fp16_t zp
);
  fp16_t svw [NUM_SCALES], sww [NUM_SCALES];
  fp16_t z_c;
  assign svw[0] = vw[0];
  assign sww[0] = ww[0];
  for (genvar n = 1; n < NUM_SCALES; n++) begin : g_sum
    fp16_add u_avw (.a(svw[n-1]), .b(vw[n]), .sub(1'b0), .y(svw[n]));
    fp16_add u_aww (.a(sww[n-1]), .b(ww[n]), .sub(1'b0), .y(sww[n]));
  end
  fp16_div u_div (.a(svw[NUM_SCALES-1]), .b(sww[NUM_SCALES-1]), .y(z_c));
  always_ff @(posedge clk) begin
    if (en) begin
      conf <= svw[NUM_SCALES-1];
      zp   <= z_c;
    end
  end
endmodule
