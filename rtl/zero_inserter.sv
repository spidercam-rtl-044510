// zero_inserter: the Nth-scale zero inserter of the streaming upsampler.
//
// A pixel is kept when both its column and its row are multiples of
// 2^(SCALE+1) and replaced by zero otherwise; the following upsampler filter
// then interpolates the gaps. Because the modulus is a power of two the test
// is on the low bits of the raster position. One register: lag LAT_IN + 1.
module zero_inserter
  import spidercam_pkg::*;
#(
  parameter int W      = 480,
  parameter int H      = 400,
  parameter int SCALE  = 0,
  parameter int LAT_IN = 0
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  en,
  input  logic  sof,
  input  fp16_t din,
  output fp16_t dout
);
  localparam logic [15:0] MASK = 16'((1 << (SCALE + 1)) - 1);
  logic        started;
  logic [15:0] x, y;

  raster_pos #(.W(W), .H(H), .OFFSET(LAT_IN)) u_pos (
    .clk, .rst, .en, .sof, .started, .x, .y
  );

  always_ff @(posedge clk) begin
    if (en) dout <= ((x & MASK) == 16'd0 && (y & MASK) == 16'd0) ? din : FP16_ZERO;
  end
endmodule
