// tb_preprocessor: two random sensor images (U8.4 pixels) are streamed with
// enable gaps through the preprocessor with and without the band-pass
// filtering. The reference computes, per image, the high-pass
// hp = 9*I - box3x3(I) (i.e. 9 * (I - box mean)), then the 5x5 Gaussian
// [1 4 6 4 1]^2/256 of hp, both with zero padding, and finally
// Iave = f1 + f2 and Idelta = f1 - f2 of the FP16-rounded f1, f2. Without
// filtering f = I.
module tb_preprocessor;
  import spidercam_pkg::*;
  import tb_fp16_pkg::*;
  localparam int W = 18, H = 12, PW = 8, FRAC = 4, LAT = 1;
  localparam int LAG1 = pre_lag(W, 1'b1), LAG0 = pre_lag(W, 1'b0);
  logic clk = 0, rst = 1, en = 0, sof = 0;
  logic [PW+FRAC-1:0] i1 = 0, i2 = 0;
  logic [15:0] ave1, del1, ave0, del0;
  always #5 clk = ~clk;
  preprocessor #(.W(W), .H(H), .PW(PW), .FRAC(FRAC), .PREPROCESSING_ENABLE(1), .LAT_IN(LAT)) u_on (
    .clk, .rst, .en, .sof, .i1, .i2, .iave(ave1), .idel(del1));
  preprocessor #(.W(W), .H(H), .PW(PW), .FRAC(FRAC), .PREPROCESSING_ENABLE(0), .LAT_IN(LAT)) u_off (
    .clk, .rst, .en, .sof, .i1, .i2, .iave(ave0), .idel(del0));
  int checks = 0, failures = 0, t = 0;
  real img [2][H][W], hp [2][H][W], fo [2][H][W];

  function automatic real mx(real a, real b);
    a = a < 0 ? -a : a; b = b < 0 ? -b : b;
    return 2.0 * (a > b ? a : b);
  endfunction

  function automatic real g5(int o);
    return (o == 0) ? 6.0 : (o == 1 || o == -1) ? 4.0 : 1.0;
  endfunction

  // tolerance: one FP16 step of the operands for each of the two roundings
  // (operand conversion and sum/difference), ties included
  task automatic chk(real got, real e, real mag, string what, int p);
    checks++;
    if (!close(got, e, 0.0, mag / 512.0 + 0.001)) begin
      failures++;
      if (failures < 10) $display("FAIL %s (%0d,%0d): %f expected %f", what, p % W, p / W, got, e);
    end
  endtask

  always @(posedge clk) if (!rst && en && !sof) begin
    int p, x, y;
    p = t - LAT - LAG1;
    if (p >= 0 && p < W * H) begin
      x = p % W; y = p / W;
      chk(fp16_to_real(ave1), fo[0][y][x] + fo[1][y][x], mx(fo[0][y][x], fo[1][y][x]), "Iave", p);
      chk(fp16_to_real(del1), fo[0][y][x] - fo[1][y][x], mx(fo[0][y][x], fo[1][y][x]), "Idelta", p);
    end
    p = t - LAT - LAG0;
    if (p >= 0 && p < W * H) begin
      x = p % W; y = p / W;
      chk(fp16_to_real(ave0), img[0][y][x] + img[1][y][x], mx(img[0][y][x], img[1][y][x]), "raw Iave", p);
      chk(fp16_to_real(del0), img[0][y][x] - img[1][y][x], mx(img[0][y][x], img[1][y][x]), "raw Idelta", p);
    end
  end
  always @(posedge clk) if (!rst && en) t <= sof ? 1 : t + 1;

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int pix [2][H][W];
    for (int k = 0; k < 2; k++)
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        pix[k][y][x] = $urandom_range(0, (1 << (PW + FRAC)) - 1);
        img[k][y][x] = real'(pix[k][y][x]) / (1 << FRAC);
      end
    for (int k = 0; k < 2; k++)
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        real s;
        s = 0.0;
        for (int j = -1; j <= 1; j++) for (int i = -1; i <= 1; i++)
          if (x + i >= 0 && x + i < W && y + j >= 0 && y + j < H) s += img[k][y + j][x + i];
        hp[k][y][x] = 9.0 * img[k][y][x] - s;
      end
    for (int k = 0; k < 2; k++)
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        real s;
        s = 0.0;
        for (int j = -2; j <= 2; j++) for (int i = -2; i <= 2; i++)
          if (x + i >= 0 && x + i < W && y + j >= 0 && y + j < H) s += g5(i) * g5(j) * hp[k][y + j][x + i];
        fo[k][y][x] = fp16_to_real(real_to_fp16(s / 256.0));   // f is converted to FP16 first
      end
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < W * H + LAT + LAG1 + 2; i++) begin
      if ($urandom_range(0, 3) == 0) begin en <= 0; @(posedge clk); end
      en <= 1; sof <= (i == 0);
      if (i >= LAT && i - LAT < W * H) begin
        i1 <= 12'(pix[0][(i - LAT) / W][(i - LAT) % W]);
        i2 <= 12'(pix[1][(i - LAT) / W][(i - LAT) % W]);
      end else begin
        i1 <= 12'($urandom); i2 <= 12'($urandom);
      end
      @(posedge clk);
    end
    en <= 0; @(posedge clk);
    if (checks != 4 * W * H) begin failures++; $display("FAIL only %0d checks", checks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
