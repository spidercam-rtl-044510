// depth_filter: "filter Z' with C", the confidence and working-range test and
// the 8-bit output code.
//
// A pixel keeps its depth when C >= C_thresh and Z_min < Z' < Z_max, with the
// three thresholds taken from the pixel's radial zone (RADIAL_ENABLE = 1) or
// from zone 0. A kept pixel is sent as code = round(Z' * depth_scale)
// saturated to 1..255; a rejected pixel is code 0 (the null depth). The paper
// gives the test and says depth leaves as 8-bit values; the linear code and
// its scale are this design's choice. Also flags why a pixel was dropped.
// One register: lag LAT_IN + 1.
module depth_filter
  import spidercam_pkg::*;
#(
  parameter int W             = 480,
  parameter int H             = 400,
  parameter int ZONES         = 16,
  parameter bit RADIAL_ENABLE = 1,
  parameter int LAT_IN        = 0
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  input  logic        sof,
  input  fp16_t       zp,
  input  fp16_t       conf,
  input  fp16_t       c_thr  [ZONES],
  input  fp16_t       z_min  [ZONES],
  input  fp16_t       z_max  [ZONES],
  input  fp16_t       depth_scale,
  input  logic [15:0] ctr_x,
  input  logic [15:0] ctr_y,
  input  logic [31:0] r2_thr [ZONES],
  output logic [7:0]  depth,
  output logic        keep,
  output logic        low_conf,
  output logic        out_of_range,
  output fp16_t       zp_q,
  output fp16_t       conf_q
);
  localparam int ZW = (ZONES > 1) ? $clog2(ZONES) : 1;
  logic [ZW-1:0] zone;
  logic [31:0]   r2;
  logic          lc, oor;
  int            code;

  radial_zone #(.W(W), .H(H), .ZONES(ZONES), .OFFSET(LAT_IN), .RADIAL_ENABLE(RADIAL_ENABLE)) u_rz (
    .clk, .rst, .en, .sof, .ctr_x, .ctr_y, .r2_thr, .zone, .r2);

  always_comb begin
    lc   = fp16_lt(conf, c_thr[zone]);
    oor  = !(fp16_lt(z_min[zone], zp) && fp16_lt(zp, z_max[zone]));
    code = fp16_to_uint_sat(fp16_mul_f(zp, depth_scale), 255);
    if (code < 1) code = 1;
  end

  always_ff @(posedge clk) begin
    if (en) begin
      keep         <= !lc && !oor;
      low_conf     <= lc;
      out_of_range <= oor;
      depth        <= (!lc && !oor) ? 8'(code) : 8'd0;
      zp_q         <= zp;
      conf_q       <= conf;
    end
  end
endmodule
