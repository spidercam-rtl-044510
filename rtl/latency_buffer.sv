// latency_buffer: re-aligns the VW/WW streams of all scales.
//
// A coarser scale starts only after the finer one has blurred and downsampled
// its images and then has longer filters and an extra upsampling chain, so its
// VW_N and WW_N reach the end of their pipeline later than those of scale 0.
// Each stream n is delayed by scales_lag_max - (scale_lag_in(n) +
// scale_lag_out(n)) enabled cycles in a delay line, so that all outputs carry
// the same pixel. Inputs of scale n have lag LAT_IN + scale_lag_in(n) +
// scale_lag_out(n); all outputs have lag LAT_IN + scales_lag_max. Buffer size
// is whatever the stage lags imply (the paper's line count depends on its own
// register placement).
module latency_buffer
  import spidercam_pkg::*;
#(
  parameter int W            = 480,
  parameter int NUM_SCALES   = 2,
  parameter bit DX_DY_ENABLE = 1
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  en,
  input  fp16_t vw_in  [NUM_SCALES],
  input  fp16_t ww_in  [NUM_SCALES],
  output fp16_t vw_out [NUM_SCALES],
  output fp16_t ww_out [NUM_SCALES]
);
  localparam int LMAX = scales_lag_max(NUM_SCALES, W, DX_DY_ENABLE);
  for (genvar n = 0; n < NUM_SCALES; n++) begin : g_s
    localparam int DLY = LMAX - scale_lag_in(n, W) - scale_lag_out(n, W, DX_DY_ENABLE);
    delay_line #(.WIDTH(32), .DEPTH(DLY)) u_dl (
      .clk, .rst, .en, .din({vw_in[n], ww_in[n]}), .dout({vw_out[n], ww_out[n]}));
  end
endmodule
