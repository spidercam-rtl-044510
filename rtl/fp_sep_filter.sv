// fp_sep_filter: separable 2-D FP16 stream filter, horizontal pass followed by
// vertical pass.
//
// One module serves all kernels of the scale pipelines: the 5x5 Burt-Adelson
// Gaussian ([1 4 6 4 1]/16 each way), the 2x2 box "downsampler filter" with
// top-left crop, the 4x4 "upsampler filter" [1 3 3 1]/4 each way with
// bottom-right crop (bilinear interpolation of a zero-inserted image combined
// with the half-pixel correction), and the 3x3 pass-through, DX and DY
// filters. At scale N the taps are spaced DIL = 2^N apart, i.e. the kernel is
// interleaved with zeros, so a coarse scale is computed on the full-resolution
// raster and only the line buffers grow (DIL lines per tap). Vertical pass
// line buffers: (OMAX-OMIN)*DIL lines. Lag: lag2d(KIND, DIL, W).
// Borders are zero padded (this design's choice).
module fp_sep_filter
  import spidercam_pkg::*;
#(
  parameter int      W      = 480,
  parameter int      H      = 400,
  parameter kern2d_e KIND   = K2_GAUSS,
  parameter int      DIL    = 1,
  parameter int      LAT_IN = 0
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  en,
  input  logic  sof,
  input  fp16_t din,
  output fp16_t dout
);
  localparam kern1d_e KH = kern_h(KIND);
  localparam kern1d_e KV = kern_v(KIND);
  fp16_t mid;

  fp_filt1d #(.W(W), .H(H), .DIR(1'b0), .KIND(KH), .DIL(DIL), .LAT_IN(LAT_IN)) u_h (
    .clk, .rst, .en, .sof, .din, .dout(mid)
  );
  fp_filt1d #(.W(W), .H(H), .DIR(1'b1), .KIND(KV), .DIL(DIL),
              .LAT_IN(LAT_IN + lag1d_h(KH, DIL))) u_v (
    .clk, .rst, .en, .sof, .din(mid), .dout
  );
endmodule
