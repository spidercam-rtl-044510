// bilinear_homography: affine warp of one sensor stream with bilinear
// interpolation ("bilinear interpolator" of the paper), in fixed point.
//
// The two sensors of the beam-splitter camera are misaligned by a few pixels
// after assembly, so each image is resampled: output pixel (x, y) takes the
// source position
//     sx = m[0]*x + m[1]*y + m[2],   sy = m[3]*x + m[4]*y + m[5]
// (m in signed Q16.16) and interpolates the four neighbours with WB-bit
// weights. The warp is small, so only ROWS source lines are kept: the output
// trails the input by LAG_ROWS lines, and the source rows
// y+LAG_ROWS-ROWS+1 .. y+LAG_ROWS-1 are available when output row y is
// produced (y-3 .. y+3 with the defaults). Source pixels outside the image or
// outside that window read as zero. The result keeps FRAC fraction bits
// (unsigned PW.FRAC), rounded. Lag: LAT_IN + LAG_ROWS*W + 1.
// The paper gives the affine model, bilinear interpolation, fixed point and
// the few buffered lines; the number formats, window size and out-of-window
// behaviour are this design's choices. ROWS must be a power of two.
module bilinear_homography #(
  parameter int W        = 480,
  parameter int H        = 400,
  parameter int PW       = 8,
  parameter int FRAC     = 4,
  parameter int WB       = 6,
  parameter int ROWS     = 8,
  parameter int LAG_ROWS = 4,
  parameter int LAT_IN   = 0
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    en,
  input  logic                    sof,
  input  logic [PW-1:0]           din,
  input  logic signed [31:0]      hm [6],
  output logic [PW+FRAC-1:0]      dout
);
  localparam int RB = $clog2(ROWS);
  logic [PW-1:0] mem [ROWS*W];

  // ---- write side
  logic        w_started;
  logic [15:0] wx, wy;
  raster_pos #(.W(W), .H(H), .OFFSET(LAT_IN)) u_wpos (
    .clk, .rst, .en, .sof, .started(w_started), .x(wx), .y(wy)
  );
  always_ff @(posedge clk) begin
    if (en && w_started && wy < 16'(H))
      mem[int'(wy[RB-1:0]) * W + int'(wx)] <= din;
  end

  // ---- read side
  logic        o_started;
  logic [15:0] ox, oy;
  raster_pos #(.W(W), .H(H), .OFFSET(LAT_IN + LAG_ROWS * W)) u_opos (
    .clk, .rst, .en, .sof, .started(o_started), .x(ox), .y(oy)
  );

  logic signed [63:0] sx, sy;
  logic signed [47:0] ix, iy;
  logic [WB-1:0]      fx, fy;
  logic [PW-1:0]      p [4];
  logic [PW+2*WB+1:0] acc;

  function automatic logic in_win(logic signed [47:0] px, logic signed [47:0] py,
                                  logic [15:0] orow);
    int lo, hi;
    lo = int'(orow) + LAG_ROWS - ROWS + 1;
    hi = int'(orow) + LAG_ROWS - 1;
    return px >= 0 && px < W && py >= 0 && py < H && py >= lo && py <= hi;
  endfunction

  always_comb begin
    sx = 64'(hm[0]) * $signed({48'd0, ox}) + 64'(hm[1]) * $signed({48'd0, oy}) + 64'(hm[2]);
    sy = 64'(hm[3]) * $signed({48'd0, ox}) + 64'(hm[4]) * $signed({48'd0, oy}) + 64'(hm[5]);
    ix = sx[63:16];
    iy = sy[63:16];
    fx = sx[15:16-WB];
    fy = sy[15:16-WB];
    for (int k = 0; k < 4; k++) begin
      logic signed [47:0] px, py;
      px = ix + 48'(k % 2);
      py = iy + 48'(k / 2);
      p[k] = in_win(px, py, oy) ? mem[int'(py[RB-1:0]) * W + int'(px[15:0])] : '0;
    end
    acc = (PW+2*WB+2)'(p[0]) * ((1 << WB) - fx) * ((1 << WB) - fy)
        + (PW+2*WB+2)'(p[1]) * fx * ((1 << WB) - fy)
        + (PW+2*WB+2)'(p[2]) * ((1 << WB) - fx) * fy
        + (PW+2*WB+2)'(p[3]) * fx * fy;
  end

  always_ff @(posedge clk) begin
    if (en) dout <= (PW+FRAC)'((acc + (1 << (2*WB - FRAC - 1))) >> (2*WB - FRAC));
  end
endmodule
