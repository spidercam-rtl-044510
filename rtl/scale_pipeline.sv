// scale_pipeline: the computation of one image scale N (0, 1, ...) of the
// DfDD pipeline, on the full-resolution raster.
//
// Inputs are the average image Iave and the difference image I_delta of this
// scale: the preprocessor output for scale 0, the downsampled images of scale
// N-1 otherwise. A coarse scale is not decimated: its pixels sit on the
// positions whose coordinates are multiples of 2^N, and every kernel of the
// scale has its taps spaced 2^N apart (zero-interleaved kernels), so all
// scales run at one pixel per enabled cycle on the same raster.
//   1. Gaussian 5x5, then 2x2 box downsampler, on Iave and on I_delta; these
//      are the downsampled outputs handed to scale N+1.
//   2. Laplacian = Iave - Upsampler(ZeroInserter_N(Down(Gauss(Iave)))), one
//      level of a Laplacian pyramid computed without buffering half a frame.
//   3. V_N = a_n * Laplacian,  W_N = b_n * V_N - I_delta, with a_n and b_n
//      taken from the radial zone of the pixel.
//   4. DX_DY_ENABLE = 1: pass-through, DX and DY 3x3 filters on V_N and W_N,
//      VW_N = sum_i w_Ni V_i W_i and WW_N = sum_i w_Ni W_i W_i over the three.
//      DX_DY_ENABLE = 0: VW_N = w_N0 V_N W_N, WW_N = w_N0 W_N W_N.
//   5. Back to full resolution: for k = N-1 down to 0, zero inserter k then
//      upsampler k (taps spaced 2^k).
// The Iave and I_delta bypass paths are delay lines sized so that every
// subtraction meets operands of the same pixel. Lags (enabled cycles after the
// frame start, LAT_IN being the lag of the inputs): downsampled outputs
// LAT_IN + scale_lag_down(N), vw/ww outputs LAT_IN + scale_lag_out(N); all
// formulas are in spidercam_pkg. The stage order, the kernels and the formulas
// follow the paper; the border padding, the DX/DY kernel [-1 0 1]/2, the
// subtraction direction of the Laplacian (image minus its blurred copy) and
// the register placement are this design's choices.
module scale_pipeline
  import spidercam_pkg::*;
#(
  parameter int W             = 480,
  parameter int H             = 400,
  parameter int SCALE         = 0,
  parameter bit DX_DY_ENABLE  = 1,
  parameter bit RADIAL_ENABLE = 1,
  parameter int ZONES         = 16,
  parameter int LAT_IN        = 0
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  input  logic        sof,
  input  fp16_t       iave,
  input  fp16_t       idel,
  // calibration: per-zone a_n, b_n, and this scale's weights w_N0..w_N2
  input  fp16_t       a_tab  [ZONES],
  input  fp16_t       b_tab  [ZONES],
  input  fp16_t       wgt    [3],
  input  logic [15:0] ctr_x,
  input  logic [15:0] ctr_y,
  input  logic [31:0] r2_thr [ZONES],
  output fp16_t       down_ave,
  output fp16_t       down_del,
  output fp16_t       vw_out,
  output fp16_t       ww_out
);
  localparam int D   = 1 << SCALE;
  localparam int LG  = lag2d(K2_GAUSS, D, W);
  localparam int L1  = LAT_IN + scale_lag_down(SCALE, W);
  localparam int LU  = L1 + 1 + lag2d(K2_UP, D, W);   // upsampled blur
  localparam int LL  = LU + 1;                        // Laplacian
  localparam int LVW = LL + 3;                        // V, W aligned
  localparam int LP  = LVW + (DX_DY_ENABLE ? lag2d(K2_PASS, D, W) : 0);
  localparam int LPR = LP + 3;                        // VW_N, WW_N
  localparam int ZW  = (ZONES > 1) ? $clog2(ZONES) : 1;

  // ---- 1. blur and downsample both images
  fp16_t g_ave, g_del;
  fp_sep_filter #(.W(W), .H(H), .KIND(K2_GAUSS), .DIL(D), .LAT_IN(LAT_IN)) u_g_ave (
    .clk, .rst, .en, .sof, .din(iave), .dout(g_ave));
  fp_sep_filter #(.W(W), .H(H), .KIND(K2_GAUSS), .DIL(D), .LAT_IN(LAT_IN)) u_g_del (
    .clk, .rst, .en, .sof, .din(idel), .dout(g_del));
  fp_sep_filter #(.W(W), .H(H), .KIND(K2_DOWN), .DIL(D), .LAT_IN(LAT_IN + LG)) u_d_ave (
    .clk, .rst, .en, .sof, .din(g_ave), .dout(down_ave));
  fp_sep_filter #(.W(W), .H(H), .KIND(K2_DOWN), .DIL(D), .LAT_IN(LAT_IN + LG)) u_d_del (
    .clk, .rst, .en, .sof, .din(g_del), .dout(down_del));

  // ---- 2. Laplacian
  fp16_t z_ave, u_ave, iave_d, lap;
  zero_inserter #(.W(W), .H(H), .SCALE(SCALE), .LAT_IN(L1)) u_z (
    .clk, .rst, .en, .sof, .din(down_ave), .dout(z_ave));
  fp_sep_filter #(.W(W), .H(H), .KIND(K2_UP), .DIL(D), .LAT_IN(L1 + 1)) u_up (
    .clk, .rst, .en, .sof, .din(z_ave), .dout(u_ave));
  delay_line #(.WIDTH(16), .DEPTH(LU - LAT_IN)) u_dl_ave (
    .clk, .rst, .en, .din(iave), .dout(iave_d));

  // ---- 3. V_N and W_N with per-zone a_n, b_n
  logic [ZW-1:0] zone_a, zone_b;
  logic [31:0]   r2_a, r2_b;
  fp16_t         v, bv, v_d1, v_d2, w, idel_d;
  radial_zone #(.W(W), .H(H), .ZONES(ZONES), .OFFSET(LL), .RADIAL_ENABLE(RADIAL_ENABLE)) u_rz_a (
    .clk, .rst, .en, .sof, .ctr_x, .ctr_y, .r2_thr, .zone(zone_a), .r2(r2_a));
  radial_zone #(.W(W), .H(H), .ZONES(ZONES), .OFFSET(LL + 1), .RADIAL_ENABLE(RADIAL_ENABLE)) u_rz_b (
    .clk, .rst, .en, .sof, .ctr_x, .ctr_y, .r2_thr, .zone(zone_b), .r2(r2_b));
  delay_line #(.WIDTH(16), .DEPTH(LL + 2 - LAT_IN)) u_dl_del (
    .clk, .rst, .en, .din(idel), .dout(idel_d));

  fp16_t lap_c, v_c, bv_c, w_c;
  fp16_add u_sub_lap (.a(iave_d), .b(u_ave), .sub(1'b1), .y(lap_c));
  fp16_mul u_mul_a   (.a(a_tab[zone_a]), .b(lap), .y(v_c));
  fp16_mul u_mul_b   (.a(b_tab[zone_b]), .b(v), .y(bv_c));
  fp16_add u_sub_w   (.a(bv), .b(idel_d), .sub(1'b1), .y(w_c));

  always_ff @(posedge clk) begin
    if (en) begin
      lap  <= lap_c;
      v    <= v_c;
      bv   <= bv_c;
      v_d1 <= v;
      w    <= w_c;
      v_d2 <= v_d1;
    end
  end

  // ---- 4. derivative estimates and weighted cross products
  localparam int NE = DX_DY_ENABLE ? 3 : 1;
  fp16_t ve [NE], we [NE];
  if (DX_DY_ENABLE) begin : g_dxdy
    fp_sep_filter #(.W(W), .H(H), .KIND(K2_PASS), .DIL(D), .LAT_IN(LVW)) u_vp (
      .clk, .rst, .en, .sof, .din(v_d2), .dout(ve[0]));
    fp_sep_filter #(.W(W), .H(H), .KIND(K2_DX), .DIL(D), .LAT_IN(LVW)) u_vx (
      .clk, .rst, .en, .sof, .din(v_d2), .dout(ve[1]));
    fp_sep_filter #(.W(W), .H(H), .KIND(K2_DY), .DIL(D), .LAT_IN(LVW)) u_vy (
      .clk, .rst, .en, .sof, .din(v_d2), .dout(ve[2]));
    fp_sep_filter #(.W(W), .H(H), .KIND(K2_PASS), .DIL(D), .LAT_IN(LVW)) u_wp (
      .clk, .rst, .en, .sof, .din(w), .dout(we[0]));
    fp_sep_filter #(.W(W), .H(H), .KIND(K2_DX), .DIL(D), .LAT_IN(LVW)) u_wx (
      .clk, .rst, .en, .sof, .din(w), .dout(we[1]));
    fp_sep_filter #(.W(W), .H(H), .KIND(K2_DY), .DIL(D), .LAT_IN(LVW)) u_wy (
      .clk, .rst, .en, .sof, .din(w), .dout(we[2]));
  end else begin : g_nodxdy
    assign ve[0] = v_d2;
    assign we[0] = w;
  end

  fp16_t pvw [NE], pww [NE], qvw [NE], qww [NE];
  fp16_t pvw_c [NE], pww_c [NE], qvw_c [NE], qww_c [NE];
  fp16_t vw_sum_c, ww_sum_c, vw_n, ww_n;
  for (genvar i = 0; i < NE; i++) begin : g_x
    fp16_mul u_vw  (.a(ve[i]),  .b(we[i]),  .y(pvw_c[i]));
    fp16_mul u_ww  (.a(we[i]),  .b(we[i]),  .y(pww_c[i]));
    fp16_mul u_wvw (.a(wgt[i]), .b(pvw[i]), .y(qvw_c[i]));
    fp16_mul u_www (.a(wgt[i]), .b(pww[i]), .y(qww_c[i]));
  end
  if (DX_DY_ENABLE) begin : g_tree
    fp16_t s_vw, s_ww;
    fp16_add u_a0 (.a(qvw[0]), .b(qvw[1]), .sub(1'b0), .y(s_vw));
    fp16_add u_a1 (.a(s_vw),   .b(qvw[2]), .sub(1'b0), .y(vw_sum_c));
    fp16_add u_a2 (.a(qww[0]), .b(qww[1]), .sub(1'b0), .y(s_ww));
    fp16_add u_a3 (.a(s_ww),   .b(qww[2]), .sub(1'b0), .y(ww_sum_c));
  end else begin : g_single
    assign vw_sum_c = qvw[0];
    assign ww_sum_c = qww[0];
  end

  always_ff @(posedge clk) begin
    if (en) begin
      for (int i = 0; i < NE; i++) begin
        pvw[i] <= pvw_c[i];
        pww[i] <= pww_c[i];
        qvw[i] <= qvw_c[i];
        qww[i] <= qww_c[i];
      end
      vw_n <= vw_sum_c;
      ww_n <= ww_sum_c;
    end
  end

  // ---- 5. upsampling chain back to full resolution
  function automatic int chain_lag(int j);   // lag at the input of chain stage j
    int l;
    l = LPR;
    for (int i = 0; i < j; i++) l += 1 + lag2d(K2_UP, 1 << (SCALE - 1 - i), W);
    return l;
  endfunction

  fp16_t cvw [SCALE+1], cww [SCALE+1];
  assign cvw[0] = vw_n;
  assign cww[0] = ww_n;
  for (genvar j = 0; j < SCALE; j++) begin : g_up
    localparam int K  = SCALE - 1 - j;
    localparam int LJ = chain_lag(j);
    fp16_t zvw, zww;
    zero_inserter #(.W(W), .H(H), .SCALE(K), .LAT_IN(LJ)) u_zvw (
      .clk, .rst, .en, .sof, .din(cvw[j]), .dout(zvw));
    zero_inserter #(.W(W), .H(H), .SCALE(K), .LAT_IN(LJ)) u_zww (
      .clk, .rst, .en, .sof, .din(cww[j]), .dout(zww));
    fp_sep_filter #(.W(W), .H(H), .KIND(K2_UP), .DIL(1 << K), .LAT_IN(LJ + 1)) u_uvw (
      .clk, .rst, .en, .sof, .din(zvw), .dout(cvw[j+1]));
    fp_sep_filter #(.W(W), .H(H), .KIND(K2_UP), .DIL(1 << K), .LAT_IN(LJ + 1)) u_uww (
      .clk, .rst, .en, .sof, .din(zww), .dout(cww[j+1]));
  end
  assign vw_out = cvw[SCALE];
  assign ww_out = cww[SCALE];

  // the stage lags above and the shared formula must agree
  if (chain_lag(SCALE) != LAT_IN + scale_lag_out(SCALE, W, DX_DY_ENABLE)) begin : g_bad
    $error("scale_pipeline: lag bookkeeping mismatch");
  end
  if (LPR != LAT_IN + scale_lag_prod(SCALE, W, DX_DY_ENABLE)) begin : g_bad2
    $error("scale_pipeline: product lag mismatch");
  end
endmodule
