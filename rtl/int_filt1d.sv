// int_filt1d: one pass of a separable integer stream filter, used by the
// fixed-point preprocessor. Sums are kept at full width (no bits are dropped):
//   KIND 0 : 3-tap box [1 1 1]
//   KIND 1 : 5-tap Burt-Adelson Gaussian [1 4 6 4 1] (unnormalised, x16)
// DIR 0 filters along lines, DIR 1 down columns (line buffers). Taps outside
// the image are zero. Registered output; lag LAT_IN + OMAX(+*W) + 1.
module int_filt1d #(
  parameter int W      = 480,
  parameter int H      = 400,
  parameter bit DIR    = 0,
  parameter int KIND   = 0,
  parameter int LAT_IN = 0
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               en,
  input  logic               sof,
  input  logic signed [31:0] din,
  output logic signed [31:0] dout
);
  localparam int OM = (KIND == 0) ? 1 : 2;
  logic [31:0] t [2*OM+1];
  logic [15:0] cx, cy;

  stream_window #(.DW(32), .W(W), .H(H), .DIR(DIR), .OMIN(-OM), .OMAX(OM),
                  .DIL(1), .LAT_IN(LAT_IN)) u_win (
    .clk, .rst, .en, .sof, .din(din), .taps(t), .cx, .cy
  );

  logic signed [31:0] r;
  if (KIND == 0) begin : g_box
    assign r = $signed(t[0]) + $signed(t[1]) + $signed(t[2]);
  end else begin : g_gauss
    assign r = $signed(t[0]) + $signed(t[4]) + 4 * ($signed(t[1]) + $signed(t[3]))
             + 6 * $signed(t[2]);
  end

  always_ff @(posedge clk) begin
    if (en) dout <= r;
  end
endmodule
