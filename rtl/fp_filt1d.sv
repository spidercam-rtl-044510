// fp_filt1d: one pass (horizontal or vertical) of a separable FP16 stream
// filter, with a registered output.
//
// The kernel arithmetic follows the paper's cost model: symmetric taps are
// added before they are weighted, weights that are powers of two are exponent
// shifts ("easy multiplies") and only the weights 6 and 3 need a multiplier.
//   K1_GAUSS5 : ((t-2 + t+2) + 4(t-1 + t+1) + 6 t0) / 16
//   K1_BOX2   : (t0 + t+1) / 2
//   K1_UP4    : ((t-2 + t+1) + 3(t-1 + t0)) / 4
//   K1_PASS3  : t0
//   K1_DERIV3 : (t+1 - t-1) / 2
// Lag: lag1d_h / lag1d_v of spidercam_pkg (window centre plus one register).
module fp_filt1d
  import spidercam_pkg::*;
#(
  parameter int      W      = 480,
  parameter int      H      = 400,
  parameter bit      DIR    = 0,
  parameter kern1d_e KIND   = K1_GAUSS5,
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
  localparam int OMIN = kern_omin(KIND);
  localparam int OMAX = kern_omax(KIND);
  localparam int NT   = OMAX - OMIN + 1;

  fp16_t       t [NT];
  logic [15:0] cx, cy;
  fp16_t       r;

  stream_window #(.DW(16), .W(W), .H(H), .DIR(DIR), .OMIN(OMIN), .OMAX(OMAX),
                  .DIL(DIL), .LAT_IN(LAT_IN)) u_win (
    .clk, .rst, .en, .sof, .din, .taps(t), .cx, .cy
  );

  localparam fp16_t SIX   = 16'h4600;
  localparam fp16_t THREE = 16'h4200;

  if (KIND == K1_GAUSS5) begin : g_gauss
    assign r = fp16_scale2(
                 fp16_add_f(fp16_add_f(fp16_add_f(t[0], t[4]),
                                       fp16_scale2(fp16_add_f(t[1], t[3]), 2)),
                            fp16_mul_f(t[2], SIX)), -4);
  end else if (KIND == K1_BOX2) begin : g_box
    assign r = fp16_scale2(fp16_add_f(t[0], t[1]), -1);
  end else if (KIND == K1_UP4) begin : g_up
    assign r = fp16_scale2(
                 fp16_add_f(fp16_add_f(t[0], t[3]),
                            fp16_mul_f(fp16_add_f(t[1], t[2]), THREE)), -2);
  end else if (KIND == K1_DERIV3) begin : g_deriv
    assign r = fp16_scale2(fp16_sub_f(t[2], t[0]), -1);
  end else begin : g_pass
    assign r = t[1];
  end

  always_ff @(posedge clk) begin
    if (en) dout <= r;
  end
endmodule
