// tb_scale_pipeline: scale 1 of the pipeline (taps spaced 2 apart, one
// upsampling stage back to full resolution) on random Iave / I_delta images
// with two radial zones. A real-valued model of the same stage list
// (Gaussian, downsampler, zero inserter, upsampler, Laplacian, V and W with
// per-zone a and b, pass / DX / DY estimates, weighted products, zero
// inserter + upsampler) gives the expected downsampled images, VW_N and WW_N
// at each raster position; the RTL output taken at the documented lag must
// agree within FP16 accuracy (relative to the frame's signal size).
module tb_scale_pipeline;
  import spidercam_pkg::*;
  import tb_fp16_pkg::*;
  localparam int W = 24, H = 16, N = 1, Z = 2, LAT = 3, DIL = 1 << N;
  localparam int LD = scale_lag_down(N, W), LO = scale_lag_out(N, W, 1'b1);
  typedef real img_t [H][W];
  logic clk = 0, rst = 1, en = 0, sof = 0;
  logic [15:0] iave = 0, idel = 0, a_tab [Z], b_tab [Z], wgt [3];
  logic [15:0] cx = 12, cy = 8;
  logic [31:0] r2_thr [Z];
  logic [15:0] down_ave, down_del, vw_out, ww_out;
  always #5 clk = ~clk;
  scale_pipeline #(.W(W), .H(H), .SCALE(N), .DX_DY_ENABLE(1), .ZONES(Z), .LAT_IN(LAT)) dut (
    .clk, .rst, .en, .sof, .iave, .idel, .a_tab, .b_tab, .wgt, .ctr_x(cx), .ctr_y(cy), .r2_thr,
    .down_ave, .down_del, .vw_out, .ww_out);
  int checks = 0, failures = 0, t = 0;
  img_t ia, id, r_da, r_dd, r_vw, r_ww;
  real m_da, m_vw, m_ww;

  function automatic real k1(kern1d_e k, int o);
    case (k)
      K1_GAUSS5: return (o == 0) ? 6.0 / 16 : (o == 1 || o == -1) ? 4.0 / 16 : 1.0 / 16;
      K1_BOX2:   return 0.5;
      K1_UP4:    return (o == -2 || o == 1) ? 0.25 : 0.75;
      K1_DERIV3: return (o == 0) ? 0.0 : o * 0.5;
      default:   return (o == 0) ? 1.0 : 0.0;
    endcase
  endfunction
  function automatic img_t conv(img_t a, kern2d_e k, int dil);
    img_t r;
    kern1d_e kh, kv;
    kh = kern_h(k); kv = kern_v(k);
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      r[y][x] = 0.0;
      for (int j = kern_omin(kv); j <= kern_omax(kv); j++)
        for (int i = kern_omin(kh); i <= kern_omax(kh); i++)
          if (x + i * dil >= 0 && x + i * dil < W && y + j * dil >= 0 && y + j * dil < H)
            r[y][x] += k1(kh, i) * k1(kv, j) * a[y + j * dil][x + i * dil];
    end
    return r;
  endfunction
  function automatic img_t zins(img_t a, int s);
    img_t r;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
      r[y][x] = (x % (2 << s) == 0 && y % (2 << s) == 0) ? a[y][x] : 0.0;
    return r;
  endfunction
  function automatic int zone_of(int x, int y);
    return ((x - 12) ** 2 + (y - 8) ** 2 < int'(r2_thr[0])) ? 0 : 1;
  endfunction
  function automatic real mag(img_t a);
    real m;
    m = 0.0;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) if ((a[y][x] < 0 ? -a[y][x] : a[y][x]) > m) m = (a[y][x] < 0 ? -a[y][x] : a[y][x]);
    return m;
  endfunction

  task automatic chk(logic [15:0] got, real e, real m, string what, int p);
    checks++;
    if (!close(fp16_to_real(got), e, 0.02, 0.01 * m)) begin
      failures++;
      if (failures < 12) $display("FAIL %s (%0d,%0d): %g expected %g", what, p % W, p / W, fp16_to_real(got), e);
    end
  endtask

  always @(posedge clk) if (!rst && en && !sof) begin
    int p;
    p = t - LAT - LD;
    if (p >= 0 && p < W * H) begin
      chk(down_ave, r_da[p / W][p % W], m_da, "down Iave", p);
      chk(down_del, r_dd[p / W][p % W], mag(r_dd), "down Idelta", p);
    end
    p = t - LAT - LO;
    if (p >= 0 && p < W * H) begin
      chk(vw_out, r_vw[p / W][p % W], m_vw, "VW", p);
      chk(ww_out, r_ww[p / W][p % W], m_ww, "WW", p);
    end
  end
  always @(posedge clk) if (!rst && en) t <= sof ? 1 : t + 1;

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    img_t lap, v, w, ve [3], we [3], pv, pw;
    real av [Z], bv [Z], wv [3];
    r2_thr[0] = 40; r2_thr[1] = 100000;
    av = '{0.5, 0.75}; bv = '{1.5, 2.0}; wv = '{1.0, 0.5, 0.25};
    for (int z = 0; z < Z; z++) begin a_tab[z] = real_to_fp16(av[z]); b_tab[z] = real_to_fp16(bv[z]); end
    for (int i = 0; i < 3; i++) wgt[i] = real_to_fp16(wv[i]);
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      ia[y][x] = fp16_to_real(real_to_fp16(real'($urandom_range(0, 4000)) / 1000.0));
      id[y][x] = fp16_to_real(real_to_fp16(real'($urandom_range(0, 2000)) / 1000.0 - 1.0));
    end
    r_da = conv(conv(ia, K2_GAUSS, DIL), K2_DOWN, DIL);
    r_dd = conv(conv(id, K2_GAUSS, DIL), K2_DOWN, DIL);
    lap = conv(zins(r_da, N), K2_UP, DIL);
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      lap[y][x] = ia[y][x] - lap[y][x];
      v[y][x] = av[zone_of(x, y)] * lap[y][x];
      w[y][x] = bv[zone_of(x, y)] * v[y][x] - id[y][x];
    end
    ve[0] = conv(v, K2_PASS, DIL); ve[1] = conv(v, K2_DX, DIL); ve[2] = conv(v, K2_DY, DIL);
    we[0] = conv(w, K2_PASS, DIL); we[1] = conv(w, K2_DX, DIL); we[2] = conv(w, K2_DY, DIL);
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      pv[y][x] = 0.0; pw[y][x] = 0.0;
      for (int i = 0; i < 3; i++) begin
        pv[y][x] += wv[i] * ve[i][y][x] * we[i][y][x];
        pw[y][x] += wv[i] * we[i][y][x] * we[i][y][x];
      end
    end
    for (int k = N - 1; k >= 0; k--) begin
      pv = conv(zins(pv, k), K2_UP, 1 << k);
      pw = conv(zins(pw, k), K2_UP, 1 << k);
    end
    r_vw = pv; r_ww = pw;
    m_da = mag(r_da); m_vw = mag(r_vw); m_ww = mag(r_ww);
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < W * H + LAT + LO + 2; i++) begin
      if ($urandom_range(0, 3) == 0) begin en <= 0; @(posedge clk); end
      en <= 1; sof <= (i == 0);
      if (i >= LAT && i - LAT < W * H) begin
        iave <= real_to_fp16(ia[(i - LAT) / W][(i - LAT) % W]);
        idel <= real_to_fp16(id[(i - LAT) / W][(i - LAT) % W]);
      end else begin
        iave <= 16'($urandom_range(0, 16'h7BFF)); idel <= 16'($urandom_range(0, 16'h7BFF));
      end
      @(posedge clk);
    end
    en <= 0; @(posedge clk);
    if (checks != 4 * W * H) begin failures++; $display("FAIL only %0d checks", checks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
