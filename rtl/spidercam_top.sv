// spidercam_top: the SpiderCam snapshot depth-from-differential-defocus core.
//
// Two sensors behind a beam splitter see the same scene with slightly
// different focus. Per pixel, the change between the images (I_delta)
// compared with the Laplacian of their average (Iave) gives depth:
// V = a * Lap(Iave), W = b*V - I_delta, Z = V/W, with a, b calibrated. The
// core computes this for 2 image scales x 3 estimates (the images and their x
// and y derivatives), fuses them as Z' = sum w V W / sum w W^2 with confidence
// C = sum w V W, and drops pixels with low confidence or depth outside the
// working range. Everything is streamed: the chip never holds a frame, only
// line buffers.
//
// Chain: bilinear_homography x2 (fixed point) -> preprocessor (fixed point,
// then FP16) -> scale_pipeline x NUM_SCALES -> latency_buffer -> sum_divide ->
// depth_filter -> depth_readout (8-bit parallel port). Calibration constants
// (homographies, per-zone a/b/thresholds, weights, zone radii) are static
// input ports.
//
// Timing: the sensors deliver pixel pairs with s_valid (s_sof on the first
// pixel of a frame), W*H pairs per frame, both sensors in step. All stages
// advance on en = s_valid, or on the flush that the core runs by itself for
// LAT_TOTAL cycles after the last pixel of a frame to push the frame tail out.
// The sensor must therefore leave at least LAT_TOTAL pixel times of blanking
// between frames; a pixel arriving during the flush raises overrun. The depth
// stream (dbg_* and the FIFO input) leaves LAT_TOTAL enabled cycles after the
// corresponding input pixel, in raster order, with out_valid.
module spidercam_top
  import spidercam_pkg::*;
#(
  parameter int W                    = 480,
  parameter int H                    = 400,
  parameter int NUM_SCALES           = 2,
  parameter bit DX_DY_ENABLE         = 1,
  parameter bit PREPROCESSING_ENABLE = 1,
  parameter bit RADIAL_ENABLE        = 1,
  parameter int ZONES                = 16,
  parameter int FIFO_DEPTH           = 4096
) (
  input  logic               clk,
  input  logic               rst,
  // two sensor pixel streams, in step
  input  logic               s_valid,
  input  logic               s_sof,
  input  logic [7:0]         s1_pix,
  input  logic [7:0]         s2_pix,
  // calibration
  input  logic signed [31:0] hm1 [6],
  input  logic signed [31:0] hm2 [6],
  input  fp16_t              a_tab [NUM_SCALES][ZONES],
  input  fp16_t              b_tab [NUM_SCALES][ZONES],
  input  fp16_t              wgt   [NUM_SCALES][3],
  input  fp16_t              c_thr [ZONES],
  input  fp16_t              z_min [ZONES],
  input  fp16_t              z_max [ZONES],
  input  fp16_t              depth_scale,
  input  logic [15:0]        ctr_x,
  input  logic [15:0]        ctr_y,
  input  logic [31:0]        r2_thr [ZONES],
  // depth stream before the FIFO
  output logic               out_valid,
  output logic               out_sof,
  output logic [7:0]         out_depth,
  output fp16_t              out_z,
  output fp16_t              out_conf,
  output logic               out_low_conf,
  output logic               out_out_of_range,
  // parallel readout port
  input  logic               port_ready,
  output logic               port_wr,
  output logic [7:0]         port_data,
  output logic               port_vsync,
  output logic [15:0]        fifo_overflows,
  // status
  output logic               flushing,
  output logic               overrun
);
  localparam int PW        = 8;
  localparam int FRAC      = 4;
  localparam int LAG_ROWS  = 4;
  localparam int L_HOM     = LAG_ROWS * W + 1;
  localparam int L_PRE     = L_HOM + pre_lag(W, PREPROCESSING_ENABLE);
  localparam int L_ALIGN   = L_PRE + scales_lag_max(NUM_SCALES, W, DX_DY_ENABLE);
  localparam int L_FILT    = L_ALIGN + 1;              // after sum_divide
  localparam int LAT_TOTAL = L_FILT + 1;               // after depth_filter
  localparam int NPIX      = W * H;

  // ---- frame control: count input pixels, then flush the pipeline
  logic        en, sof;
  logic [31:0] n_in, n_flush;
  assign sof = s_valid && s_sof;
  assign en  = s_valid || flushing;

  always_ff @(posedge clk) begin
    if (rst) begin
      n_in     <= '0;
      n_flush  <= '0;
      flushing <= 1'b0;
      overrun  <= 1'b0;
    end else begin
      if (s_valid && flushing) overrun <= 1'b1;
      if (flushing) begin
        if (n_flush == 32'(LAT_TOTAL - 1)) flushing <= 1'b0;
        n_flush <= n_flush + 32'd1;
      end
      if (s_valid) begin
        if (((sof ? 32'd0 : n_in) + 32'd1) == 32'(NPIX)) begin
          flushing <= 1'b1;
          n_flush  <= '0;
        end
        n_in <= (sof ? 32'd0 : n_in) + 32'd1;
      end
    end
  end

  // ---- homography of both sensors
  logic [PW+FRAC-1:0] i1, i2;
  bilinear_homography #(.W(W), .H(H), .PW(PW), .FRAC(FRAC), .LAG_ROWS(LAG_ROWS), .LAT_IN(0)) u_hom1 (
    .clk, .rst, .en, .sof, .din(s1_pix), .hm(hm1), .dout(i1));
  bilinear_homography #(.W(W), .H(H), .PW(PW), .FRAC(FRAC), .LAG_ROWS(LAG_ROWS), .LAT_IN(0)) u_hom2 (
    .clk, .rst, .en, .sof, .din(s2_pix), .hm(hm2), .dout(i2));

  // ---- preprocessing
  fp16_t iave [NUM_SCALES+1], idel [NUM_SCALES+1];
  preprocessor #(.W(W), .H(H), .PW(PW), .FRAC(FRAC),
                 .PREPROCESSING_ENABLE(PREPROCESSING_ENABLE), .LAT_IN(L_HOM)) u_pre (
    .clk, .rst, .en, .sof, .i1, .i2, .iave(iave[0]), .idel(idel[0]));

  // ---- scales
  fp16_t vw [NUM_SCALES], ww [NUM_SCALES];
  for (genvar n = 0; n < NUM_SCALES; n++) begin : g_scale
    scale_pipeline #(.W(W), .H(H), .SCALE(n), .DX_DY_ENABLE(DX_DY_ENABLE),
                     .RADIAL_ENABLE(RADIAL_ENABLE), .ZONES(ZONES),
                     .LAT_IN(L_PRE + scale_lag_in(n, W))) u_scale (
      .clk, .rst, .en, .sof,
      .iave(iave[n]), .idel(idel[n]),
      .a_tab(a_tab[n]), .b_tab(b_tab[n]), .wgt(wgt[n]),
      .ctr_x, .ctr_y, .r2_thr,
      .down_ave(iave[n+1]), .down_del(idel[n+1]),
      .vw_out(vw[n]), .ww_out(ww[n]));
  end

  // ---- align scales, fuse, filter
  fp16_t vw_a [NUM_SCALES], ww_a [NUM_SCALES];
  latency_buffer #(.W(W), .NUM_SCALES(NUM_SCALES), .DX_DY_ENABLE(DX_DY_ENABLE)) u_lat (
    .clk, .rst, .en, .vw_in(vw), .ww_in(ww), .vw_out(vw_a), .ww_out(ww_a));

  fp16_t conf, zp;
  sum_divide #(.NUM_SCALES(NUM_SCALES)) u_sd (
    .clk, .en, .vw(vw_a), .ww(ww_a), .conf, .zp);

  logic keep;
  depth_filter #(.W(W), .H(H), .ZONES(ZONES), .RADIAL_ENABLE(RADIAL_ENABLE), .LAT_IN(L_FILT)) u_filt (
    .clk, .rst, .en, .sof, .zp, .conf, .c_thr, .z_min, .z_max, .depth_scale,
    .ctr_x, .ctr_y, .r2_thr,
    .depth(out_depth), .keep, .low_conf(out_low_conf), .out_of_range(out_out_of_range),
    .zp_q(out_z), .conf_q(out_conf));

  // ---- output position
  logic        o_started;
  logic [15:0] ox, oy;
  raster_pos #(.W(W), .H(H), .OFFSET(LAT_TOTAL)) u_opos (
    .clk, .rst, .en, .sof, .started(o_started), .x(ox), .y(oy));
  assign out_valid = en && o_started && oy < 16'(H);
  assign out_sof   = out_valid && ox == 16'd0 && oy == 16'd0;

  depth_readout #(.FIFO_DEPTH(FIFO_DEPTH)) u_out (
    .clk, .rst, .in_valid(out_valid), .in_sof(out_sof), .in_depth(out_depth),
    .port_ready, .port_wr, .port_data, .port_vsync, .overflows(fifo_overflows), .level());
endmodule
