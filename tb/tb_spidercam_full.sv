// tb_spidercam_full: one 480 x 400 frame through the SpiderCam core at its
// default size and configuration (two scales, DX/DY estimates, band-pass
// preprocessing, 16 radial zones, 4096-byte readout FIFO).
//
// Sensor 2 sees the scene of sensor 1 shifted one pixel to the right, and its
// homography shifts it back (source x' = x + 1), so after the warp both
// images agree away from the right border and the joint depth must be
// Z' = 1/b of the pixel's radial zone. The left third of the scene is
// textured, the rest flat; flat pixels away from the texture must be dropped
// for low confidence. The readout port is always ready, so every depth byte
// must reach it. Checks: Z' per zone on the texture, drops on the flat part,
// pixel and byte counts, frame marker, one flush, no overrun.
module tb_spidercam_full;
  import spidercam_pkg::*;
  import tb_fp16_pkg::*;

  localparam int W = 480, H = 400, NS = 2, Z = 16;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic s_valid = 0, s_sof = 0;
  logic [7:0] s1_pix = 0, s2_pix = 0;
  logic signed [31:0] hm1 [6], hm2 [6];
  fp16_t a_tab [NS][Z], b_tab [NS][Z], wgt [NS][3];
  fp16_t c_thr [Z], z_min [Z], z_max [Z], depth_scale;
  logic [15:0] ctr_x, ctr_y;
  logic [31:0] r2_thr [Z];
  logic out_valid, out_sof, out_low_conf, out_oor;
  logic [7:0] out_depth;
  fp16_t out_z, out_conf;
  logic port_ready = 1, port_wr, port_vsync;
  logic [7:0] port_data;
  logic [15:0] fifo_overflows;
  logic flushing, overrun;

  spidercam_top dut (
    .clk, .rst, .s_valid, .s_sof, .s1_pix, .s2_pix, .hm1, .hm2,
    .a_tab, .b_tab, .wgt, .c_thr, .z_min, .z_max, .depth_scale, .ctr_x, .ctr_y, .r2_thr,
    .out_valid, .out_sof, .out_depth, .out_z, .out_conf, .out_low_conf,
    .out_out_of_range(out_oor), .port_ready, .port_wr, .port_data, .port_vsync,
    .fifo_overflows, .flushing, .overrun);

  int checks = 0, failures = 0;
  int n_out = 0, n_keep = 0, n_rx = 0, n_vs = 0, n_flush = 0, n_zchk = 0, n_flat = 0;
  logic [7:0] img [H][W];

  function automatic int zone_of(int x, int y);
    int r2;
    r2 = (x - int'(ctr_x)) ** 2 + (y - int'(ctr_y)) ** 2;
    for (int z = 0; z < Z; z++) if (r2 < int'(r2_thr[z])) return z;
    return Z - 1;
  endfunction
  function automatic bit zone_uniform(int x, int y, int r);
    int z0;
    z0 = zone_of(x, y);
    for (int d = -r; d <= r; d++)
      if (zone_of(x + d, y) != z0 || zone_of(x, y + d) != z0 ||
          zone_of(x + d, y + d) != z0 || zone_of(x + d, y - d) != z0) return 0;
    return 1;
  endfunction
  function automatic real bval(int z);
    return 1.0 + real'(z) / 16.0;
  endfunction
  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL: %s", msg);
  endtask

  int ox = 0, oy = 0;
  always @(posedge clk) begin
    if (!rst && out_valid) begin
      if (out_sof) begin ox = 0; oy = 0; end
      n_out++;
      if (out_depth != 0) n_keep++;
      if (ox >= 8 && ox < 150 && oy >= 8 && oy < H - 8 && zone_uniform(ox, oy, 6)) begin
        n_zchk++;
        checks++;
        if (!close(fp16_to_real(out_z), 1.0 / bval(zone_of(ox, oy)), 0.03, 0.0))
          fail($sformatf("Z' at (%0d,%0d): %f expected %f", ox, oy, fp16_to_real(out_z),
                         1.0 / bval(zone_of(ox, oy))));
      end
      if (ox >= 200 && ox < W - 12 && oy >= 12 && oy < H - 12) begin
        n_flat++;
        checks++;
        if (!out_low_conf || out_depth != 0) fail($sformatf("flat pixel (%0d,%0d) kept", ox, oy));
      end
      ox++;
      if (ox == W) begin ox = 0; oy++; end
    end
    if (!rst && port_wr) begin
      n_rx++;
      if (port_vsync) n_vs++;
    end
    if (!rst && flushing && !$past(flushing)) n_flush++;
  end

  initial begin
    #40000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hm1 = '{32'sd65536, 0, 0, 0, 32'sd65536, 0};
    hm2 = '{32'sd65536, 0, 32'sd65536, 0, 32'sd65536, 0};
    ctr_x = 16'(W / 2);
    ctr_y = 16'(H / 2);
    for (int z = 0; z < Z; z++) begin
      r2_thr[z] = 32'((16 * (z + 1)) ** 2);
      c_thr[z]  = real_to_fp16(0.25);
      z_min[z]  = real_to_fp16(0.2);
      z_max[z]  = real_to_fp16(2.0);
      for (int n = 0; n < NS; n++) begin
        a_tab[n][z] = real_to_fp16(-1.0 / 256.0);
        b_tab[n][z] = real_to_fp16(bval(z));
      end
    end
    for (int n = 0; n < NS; n++) wgt[n] = '{16'h3C00, 16'h3800, 16'h3800};
    depth_scale = real_to_fp16(200.0);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        img[y][x] = (x < 160) ? 8'($urandom_range(0, 255)) : 8'd100;
    repeat (4) @(posedge clk);
    rst <= 0;
    for (int y = 0; y < H; y++) begin
      for (int x = 0; x < W; x++) begin
        if ($urandom_range(0, 7) == 0) begin s_valid <= 0; @(posedge clk); end
        s_valid <= 1;
        s_sof   <= (x == 0 && y == 0);
        s1_pix  <= img[y][x];
        s2_pix  <= (x == 0) ? 8'd0 : img[y][x - 1];
        @(posedge clk);
      end
      s_valid <= 0;
      repeat (4) @(posedge clk);
    end
    s_valid <= 0;
    s_sof   <= 0;
    @(posedge clk);
    while (flushing) @(posedge clk);
    repeat (5000) @(posedge clk);
    checks++; if (n_out != W * H) fail($sformatf("%0d output pixels", n_out));
    checks++; if (n_rx != W * H || fifo_overflows != 0) fail($sformatf("%0d bytes read out, %0d lost", n_rx, fifo_overflows));
    checks++; if (n_vs != 1) fail($sformatf("%0d frame markers", n_vs));
    checks++; if (n_flush != 1) fail($sformatf("%0d flushes", n_flush));
    checks++; if (overrun) fail("overrun flagged");
    checks++; if (n_keep == 0 || n_zchk < 1000 || n_flat < 1000) fail("too few checked pixels");
    $display("pixels %0d kept %0d depth-checked %0d flat-checked %0d", n_out, n_keep, n_zchk, n_flat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
