// preprocessor: denoising of the two aligned images and formation of the
// average and difference images, the fixed-point front of the pipeline.
//
// With PREPROCESSING_ENABLE = 1 each image I_k goes through
//     h_k = 9*I_k - Box3x3(I_k)        (the image minus its local mean)
//     g_k = Gauss5x5(h_k)              ([1 4 6 4 1] x [1 4 6 4 1], sum 256)
// in integers, with no bit dropped; g_k is then converted to FP16 with the
// exact power-of-two scale 2^-(FRAC+8), so the FP16 value is 9 times the
// denoised image in pixel units (the constant factor cancels in the depth
// Z = VW/WW and is absorbed by the calibrated thresholds). With
// PREPROCESSING_ENABLE = 0 the images are converted directly (scale 2^-FRAC).
// Then, in FP16, Iave = f_1 + f_2 and I_delta = f_1 - f_2.
// The paper gives the order box filter, subtraction, Gaussian, fixed point
// before and FP16 after the conversion, and the plain sum and difference; the
// 3x3 box size and the subtraction direction are this design's choices.
// Inputs: unsigned PW.FRAC pixels from the homography. Lag:
// LAT_IN + pre_lag(W, PREPROCESSING_ENABLE) (see spidercam_pkg).
module preprocessor
  import spidercam_pkg::*;
#(
  parameter int W                    = 480,
  parameter int H                    = 400,
  parameter int PW                   = 8,
  parameter int FRAC                 = 4,
  parameter bit PREPROCESSING_ENABLE = 1,
  parameter int LAT_IN               = 0
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               en,
  input  logic               sof,
  input  logic [PW+FRAC-1:0] i1,
  input  logic [PW+FRAC-1:0] i2,
  output fp16_t              iave,
  output fp16_t              idel
);
  localparam int LBOX = 2 + (W + 1);         // 3x3 box, horizontal + vertical
  localparam int LGS  = 3 + (2 * W + 1);     // 5x5 Gaussian
  fp16_t f [2];

  for (genvar k = 0; k < 2; k++) begin : g_img
    logic signed [31:0] pin;
    assign pin = $signed({{(32-PW-FRAC){1'b0}}, (k == 0) ? i1 : i2});
    if (PREPROCESSING_ENABLE) begin : g_pre
      logic signed [31:0] bh, bv, pd, hp, gh, gv;
      int_filt1d #(.W(W), .H(H), .DIR(1'b0), .KIND(0), .LAT_IN(LAT_IN)) u_bh (
        .clk, .rst, .en, .sof, .din(pin), .dout(bh));
      int_filt1d #(.W(W), .H(H), .DIR(1'b1), .KIND(0), .LAT_IN(LAT_IN + 2)) u_bv (
        .clk, .rst, .en, .sof, .din(bh), .dout(bv));
      delay_line #(.WIDTH(32), .DEPTH(LBOX)) u_dl (
        .clk, .rst, .en, .din(pin), .dout(pd));
      always_ff @(posedge clk) begin
        if (en) hp <= 9 * pd - bv;
      end
      int_filt1d #(.W(W), .H(H), .DIR(1'b0), .KIND(1), .LAT_IN(LAT_IN + LBOX + 1)) u_gh (
        .clk, .rst, .en, .sof, .din(hp), .dout(gh));
      int_filt1d #(.W(W), .H(H), .DIR(1'b1), .KIND(1), .LAT_IN(LAT_IN + LBOX + 4)) u_gv (
        .clk, .rst, .en, .sof, .din(gh), .dout(gv));
      always_ff @(posedge clk) begin
        if (en) f[k] <= int_to_fp16(gv, FRAC + 8);
      end
    end else begin : g_raw
      always_ff @(posedge clk) begin
        if (en) f[k] <= int_to_fp16(pin, FRAC);
      end
    end
  end

  fp16_t s_c, d_c;
  fp16_add u_add (.a(f[0]), .b(f[1]), .sub(1'b0), .y(s_c));
  fp16_add u_sub (.a(f[0]), .b(f[1]), .sub(1'b1), .y(d_c));
  always_ff @(posedge clk) begin
    if (en) begin
      iave <= s_c;
      idel <= d_c;
    end
  end

  if (pre_lag(W, PREPROCESSING_ENABLE) != (PREPROCESSING_ENABLE ? LBOX + 1 + LGS + 2 : 2))
  begin : g_bad
    $error("preprocessor: lag bookkeeping mismatch");
  end
endmodule
