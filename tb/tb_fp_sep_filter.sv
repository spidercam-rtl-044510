// tb_fp_sep_filter: five separable FP16 stream filters (Gaussian, 2x2 box of
// the downsampler at dilation 2, upsampling kernel, x derivative at
// dilation 2, y derivative) filter the same random FP16 frame, streamed with
// enable gaps. Each output pixel is compared with a real-valued reference
// convolution: dilated taps, zero outside the image, output aligned to the
// raster position that trails the input by the filter's lag.
module tb_fp_sep_filter;
  import spidercam_pkg::*;
  import tb_fp16_pkg::*;
  localparam int W = 20, H = 14, LAT = 1, NF = 5;
  localparam kern2d_e KINDS [NF] = '{K2_GAUSS, K2_DOWN, K2_UP, K2_DX, K2_DY};
  localparam int      DILS  [NF] = '{1, 2, 1, 2, 1};
  logic clk = 0, rst = 1, en = 0, sof = 0;
  logic [15:0] din = 0;
  logic [15:0] dout [NF];
  always #5 clk = ~clk;
  int checks = 0, failures = 0, t = 0;
  real img [H][W];

  function automatic real k1(kern1d_e k, int o);   // reference 1-D kernels
    case (k)
      K1_GAUSS5: return (o == 0) ? 6.0 / 16 : (o == 1 || o == -1) ? 4.0 / 16 : 1.0 / 16;
      K1_BOX2:   return 0.5;
      K1_UP4:    return (o == -2 || o == 1) ? 0.25 : 0.75;
      K1_DERIV3: return (o == 0) ? 0.0 : o * 0.5;
      default:   return (o == 0) ? 1.0 : 0.0;
    endcase
  endfunction

  function automatic real ref_px(kern2d_e k, int dil, int x, int y);
    real s;
    kern1d_e kh, kv;
    kh = kern_h(k); kv = kern_v(k);
    s = 0.0;
    for (int j = kern_omin(kv); j <= kern_omax(kv); j++)
      for (int i = kern_omin(kh); i <= kern_omax(kh); i++) begin
        int xx, yy;
        xx = x + i * dil; yy = y + j * dil;
        if (xx >= 0 && xx < W && yy >= 0 && yy < H) s += k1(kh, i) * k1(kv, j) * img[yy][xx];
      end
    return s;
  endfunction

  for (genvar f = 0; f < NF; f++) begin : g_f
    localparam int LAG = lag2d(KINDS[f], DILS[f], W);
    fp_sep_filter #(.W(W), .H(H), .KIND(KINDS[f]), .DIL(DILS[f]), .LAT_IN(LAT)) dut (
      .clk, .rst, .en, .sof, .din, .dout(dout[f]));
    always @(posedge clk) if (!rst && en && !sof) begin
      int p;
      real e;
      p = t - LAT - LAG;
      if (p >= 0 && p < W * H) begin
        e = ref_px(KINDS[f], DILS[f], p % W, p / W);
        checks++;
        if (!close(fp16_to_real(dout[f]), e, 0.01, 0.003)) begin
          failures++;
          if (failures < 10) $display("FAIL filter %0d (%0d,%0d): %f expected %f", f, p % W, p / W, fp16_to_real(dout[f]), e);
        end
      end
    end
  end

  always @(posedge clk) if (!rst && en) t <= sof ? 1 : t + 1;

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
      img[y][x] = fp16_to_real(real_to_fp16(real'($urandom_range(0, 2000)) / 1000.0 - 1.0));
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < W * H + LAT + 8 * W; i++) begin
      if ($urandom_range(0, 3) == 0) begin en <= 0; @(posedge clk); end
      en <= 1; sof <= (i == 0);
      din <= (i >= LAT && i - LAT < W * H) ? real_to_fp16(img[(i - LAT) / W][(i - LAT) % W]) : 16'($urandom);
      @(posedge clk);
    end
    en <= 0; @(posedge clk);
    if (checks != NF * W * H) begin failures++; $display("FAIL only %0d checks", checks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
