// tb_bilinear_homography: checks the affine warp against a reference
// bilinear interpolation computed in the testbench. A random image is
// streamed with pixel gaps; the warp has a small rotation/scale and a
// sub-pixel shift. Every output pixel is compared with the reference
// (tolerance: one output LSB); the output lag of LAG_ROWS*W+1 enabled cycles
// is checked through the raster position of the first output pixel.
module tb_bilinear_homography;
  localparam int W = 24, H = 16, PW = 8, FRAC = 4, WB = 6, ROWS = 8, LAG = 4;
  logic clk = 0, rst = 1, en = 0, sof = 0;
  logic [PW-1:0] din = 0;
  logic signed [31:0] hm [6];
  logic [PW+FRAC-1:0] dout;
  always #5 clk = ~clk;

  bilinear_homography #(.W(W), .H(H), .PW(PW), .FRAC(FRAC), .WB(WB), .ROWS(ROWS),
                        .LAG_ROWS(LAG), .LAT_IN(0)) dut (
    .clk, .rst, .en, .sof, .din, .hm, .dout);

  int checks = 0, failures = 0;
  logic [7:0] img [H][W];
  int t = 0;   // enabled-cycle index

  function automatic int ref_pix(int x, int y);
    longint sx, sy, ix, iy;
    int fx, fy, acc, p [4];
    sx = longint'(hm[0]) * x + longint'(hm[1]) * y + longint'(hm[2]);
    sy = longint'(hm[3]) * x + longint'(hm[4]) * y + longint'(hm[5]);
    ix = sx >>> 16; iy = sy >>> 16;
    fx = int'((sx & 64'hFFFF) >> (16 - WB));
    fy = int'((sy & 64'hFFFF) >> (16 - WB));
    for (int k = 0; k < 4; k++) begin
      longint px, py;
      px = ix + (k % 2); py = iy + (k / 2);
      p[k] = (px >= 0 && px < W && py >= 0 && py < H && py >= y + LAG - ROWS + 1 && py <= y + LAG - 1)
             ? int'(img[py][px]) : 0;
    end
    acc = p[0] * (64 - fx) * (64 - fy) + p[1] * fx * (64 - fy) + p[2] * (64 - fx) * fy + p[3] * fx * fy;
    return (acc + (1 << (2 * WB - FRAC - 1))) >> (2 * WB - FRAC);
  endfunction

  always @(posedge clk) begin
    if (en) begin
      // dout now shows the value registered for enabled cycle t-1, position t-1-LAG*W
      int p;
      p = t - 1 - LAG * W;
      if (p >= 0 && p < W * H) begin
        int e;
        e = ref_pix(p % W, p / W);
        checks++;
        if (int'(dout) != e) begin
          failures++;
          if (failures < 10) $display("FAIL (%0d,%0d): %0d expected %0d", p % W, p / W, dout, e);
        end
      end
      t++;
    end
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    // x' = 1.01x - 0.02y + 0.4 ; y' = 0.015x + 0.99y - 0.3
    hm = '{32'sd66191, -32'sd1311, 32'sd26214, 32'sd983, 32'sd64881, -32'sd19661};
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) img[y][x] = 8'($urandom_range(0, 255));
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < W * H + LAG * W + 4; i++) begin
      if ($urandom_range(0, 3) == 0) begin en <= 0; @(posedge clk); end
      en  <= 1;
      sof <= (i == 0);
      din <= (i < W * H) ? img[i / W][i % W] : 8'd0;
      @(posedge clk);
    end
    en <= 0;
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
