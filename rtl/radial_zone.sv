// radial_zone: radial-zone tracking for the spatially varying parameters.
//
// Field curvature of the small optics makes the calibrated constants a, b and
// the output thresholds depend on the distance of a pixel from the optical
// centre. The image is split into ZONES rings (16 in the paper) and every
// stage that uses a per-zone constant needs the zone of the pixel it is
// processing. This module follows the raster of a stream of lag OFFSET and
// keeps the squared distance r2 = (x-cx)^2 + (y-cy)^2 of the current pixel by
// increments ((x+1-cx)^2 = (x-cx)^2 + 2(x-cx) + 1), so neither the
// coordinates nor a square root are needed. The zone is the smallest z with
// r2 < r2_thr[z] (the paper's loop from the outermost zone inwards, keeping
// the last hit); a pixel beyond every threshold is put in the outermost zone,
// which is this design's choice. With RADIAL_ENABLE = 0 every pixel is zone 0.
// Outputs are combinational for the current enabled cycle. cx, cy and r2_thr
// are static configuration, sampled at each start of frame.
module radial_zone #(
  parameter int W             = 480,
  parameter int H             = 400,
  parameter int ZONES         = 16,
  parameter int OFFSET        = 0,
  parameter bit RADIAL_ENABLE = 1,
  localparam int ZW           = (ZONES > 1) ? $clog2(ZONES) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          en,
  input  logic          sof,
  input  logic [15:0]   ctr_x,
  input  logic [15:0]   ctr_y,
  input  logic [31:0]   r2_thr [ZONES],
  output logic [ZW-1:0] zone,
  output logic [31:0]   r2
);
  logic        started;
  logic [15:0] x, y;
  logic signed [31:0] rx2_q, ry2_q, rx2, ry2, dx, dy, cx2, cy2;

  raster_pos #(.W(W), .H(H), .OFFSET(OFFSET)) u_pos (
    .clk, .rst, .en, .sof, .started, .x, .y
  );

  always_comb begin
    cx2 = $signed({16'd0, ctr_x}) * $signed({16'd0, ctr_x});
    cy2 = $signed({16'd0, ctr_y}) * $signed({16'd0, ctr_y});
    dx  = $signed({16'd0, x}) - $signed({16'd0, ctr_x});
    dy  = $signed({16'd0, y}) - $signed({16'd0, ctr_y});
    // position (0,0) until the stream has started, tracked values afterwards
    rx2 = (sof || !started) ? cx2 : rx2_q;
    ry2 = (sof || !started) ? cy2 : ry2_q;
    r2  = 32'(rx2 + ry2);
    zone = ZW'(ZONES - 1);
    if (RADIAL_ENABLE) begin
      for (int z = ZONES - 1; z >= 0; z--)
        if (r2 < r2_thr[z]) zone = ZW'(z);
    end else begin
      zone = '0;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rx2_q <= '0;
      ry2_q <= '0;
    end else if (en) begin
      if (!started) begin
        rx2_q <= cx2;
        ry2_q <= cy2;
      end else if (x == 16'(W - 1)) begin
        rx2_q <= cx2;
        ry2_q <= ry2 + 2 * dy + 1;
      end else begin
        rx2_q <= rx2 + 2 * dx + 1;
      end
    end
  end
endmodule
