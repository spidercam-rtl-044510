// tb_spidercam_top: end-to-end test of the SpiderCam core on a small frame.
//
// Both sensors see the same textured scene (identity homographies), so the
// difference image is exactly zero and W = b*V for every estimate; the joint
// depth must then be Z' = sum w b V^2 / sum w b^2 V^2 = 1/b for the radial
// zone of the pixel, whatever the texture. b differs per zone, so the test
// also checks that each stage picks the right zone. A flat part of the scene
// has no texture (V = 0) and must be dropped for low confidence; two zones
// get a working range that excludes their depth and must be dropped for
// range. The readout port is throttled and its FIFO is small, so back-pressure
// and FIFO overflow both occur. Two frames are sent, with pixel gaps.
// Counted mechanisms: kept pixels, low-confidence drops, range drops,
// radial zones seen, port back-pressure cycles, FIFO overflows, pipeline
// flushes. Each must occur at least once.
module tb_spidercam_top;
  import spidercam_pkg::*;
  import tb_fp16_pkg::*;

  localparam int W  = 64;
  localparam int H  = 48;
  localparam int NS = 2;
  localparam int Z  = 16;
  localparam int FRAMES = 2;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic s_valid = 0, s_sof = 0;
  logic [7:0] s1_pix = 0, s2_pix = 0;
  logic signed [31:0] hm [6];
  fp16_t a_tab [NS][Z], b_tab [NS][Z], wgt [NS][3];
  fp16_t c_thr [Z], z_min [Z], z_max [Z], depth_scale;
  logic [15:0] ctr_x, ctr_y;
  logic [31:0] r2_thr [Z];
  logic out_valid, out_sof, out_low_conf, out_oor;
  logic [7:0] out_depth;
  fp16_t out_z, out_conf;
  logic port_ready = 0, port_wr, port_vsync;
  logic [7:0] port_data;
  logic [15:0] fifo_overflows;
  logic flushing, overrun;

  spidercam_top #(.W(W), .H(H), .NUM_SCALES(NS), .FIFO_DEPTH(64)) dut (
    .clk, .rst, .s_valid, .s_sof, .s1_pix, .s2_pix, .hm1(hm), .hm2(hm),
    .a_tab, .b_tab, .wgt, .c_thr, .z_min, .z_max, .depth_scale, .ctr_x, .ctr_y, .r2_thr,
    .out_valid, .out_sof, .out_depth, .out_z, .out_conf, .out_low_conf,
    .out_out_of_range(out_oor), .port_ready, .port_wr, .port_data, .port_vsync,
    .fifo_overflows, .flushing, .overrun);

  int checks = 0, failures = 0;
  int n_keep = 0, n_lowc = 0, n_oor = 0, n_bp = 0, n_flush = 0, n_rx = 0, n_out = 0;
  bit zone_seen [Z];
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
    for (int dy = -r; dy <= r; dy++)
      for (int dx = -r; dx <= r; dx++)
        if (zone_of(x + dx, y + dy) != z0) return 0;
    return 1;
  endfunction
  function automatic real bval(int z);
    return 1.0 + real'(z) / 8.0;
  endfunction

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL: %s", msg);
  endtask

  // ---- scoring of the depth stream
  int ox = 0, oy = 0;
  always @(posedge clk) begin
    if (!rst && out_valid) begin
      int z;
      real zr;
      if (out_sof) begin ox = 0; oy = 0; end
      n_out++;
      z  = zone_of(ox, oy);
      zone_seen[z] = 1;
      zr = fp16_to_real(out_z);
      if (out_depth != 0) n_keep++;
      if (out_low_conf) n_lowc++;
      else if (out_oor) n_oor++;
      // textured part, away from the flat region and zone borders
      if (ox < 12 && zone_uniform(ox, oy, 5)) begin
        checks++;
        if (!close(zr, 1.0 / bval(z), 0.03, 0.0))
          fail($sformatf("Z' at (%0d,%0d) zone %0d: %f expected %f", ox, oy, z, zr, 1.0 / bval(z)));
        checks++;
        if (z == 3) begin
          if (out_depth != 0 || !(out_oor || out_low_conf)) fail($sformatf("zone %0d pixel kept", z));
        end else if (!out_low_conf) begin
          if (out_depth != 8'(int'(zr * 200.0 + 0.5)) && out_depth != 8'(int'(zr * 200.0 + 0.5) - 1)
              && out_depth != 8'(int'(zr * 200.0 + 0.5) + 1))
            fail($sformatf("depth code %0d for Z' %f", out_depth, zr));
        end
      end
      // flat part, far from texture and image edges: no confidence
      if (ox >= 38 && ox <= 44 && oy >= 12 && oy < H - 12) begin
        checks++;
        if (!out_low_conf || out_depth != 0) fail($sformatf("flat pixel (%0d,%0d) not dropped", ox, oy));
      end
      ox++;
      if (ox == W) begin ox = 0; oy++; end
    end
  end

  // ---- readout port: throttled bridge
  int vs_seen = 0;
  always @(posedge clk) begin
    port_ready <= ($urandom_range(0, 3) == 0);
    if (!rst) begin
      if (!port_ready && dut.u_out.level != 0) n_bp++;
      if (port_wr) begin
        n_rx++;
        if (port_vsync) vs_seen++;
      end
      if (flushing && !$past(flushing)) n_flush++;
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hm = '{32'sd65536, 0, 0, 0, 32'sd65536, 0};
    ctr_x = 16'(W / 2);
    ctr_y = 16'(H / 2);
    for (int z = 0; z < Z; z++) begin
      r2_thr[z] = 32'((8 * (z + 1)) ** 2);   // rings 8 pixels wide
      c_thr[z]  = real_to_fp16(0.25);
      z_min[z]  = real_to_fp16(0.2);
      z_max[z]  = (z == 3) ? real_to_fp16(0.3) : real_to_fp16(2.0);
      for (int n = 0; n < NS; n++) begin
        a_tab[n][z] = real_to_fp16(-1.0 / 256.0);
        b_tab[n][z] = real_to_fp16(bval(z));
      end
    end
    for (int n = 0; n < NS; n++) wgt[n] = '{16'h3C00, 16'h3800, 16'h3800};
    depth_scale = real_to_fp16(200.0);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        img[y][x] = (x < 20) ? 8'($urandom_range(0, 255)) : 8'd100;
    repeat (4) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < FRAMES; f++) begin
      for (int y = 0; y < H; y++) begin
        for (int x = 0; x < W; x++) begin
          while ($urandom_range(0, 4) == 0) begin
            s_valid <= 0;
            @(posedge clk);
          end
          s_valid <= 1;
          s_sof   <= (x == 0 && y == 0);
          s1_pix  <= img[y][x];
          s2_pix  <= img[y][x];
          @(posedge clk);
        end
        s_valid <= 0;
        repeat (3) @(posedge clk);   // line blanking
      end
      s_valid <= 0;
      s_sof   <= 0;
      @(posedge clk);
      while (flushing) @(posedge clk);
      repeat (10) @(posedge clk);
    end
    repeat (5000) @(posedge clk);
    checks++; if (n_out != FRAMES * W * H) fail($sformatf("%0d output pixels", n_out));
    checks++; if (n_rx + int'(fifo_overflows) != FRAMES * W * H)
      fail($sformatf("readout %0d + overflow %0d", n_rx, fifo_overflows));
    checks++; if (overrun) fail("overrun flagged");
    checks++; if (n_keep == 0) fail("no pixel kept");
    checks++; if (n_lowc == 0) fail("no low-confidence drop");
    checks++; if (n_oor == 0) fail("no range drop");
    checks++; if (n_bp == 0) fail("no back-pressure");
    checks++; if (fifo_overflows == 0) fail("no FIFO overflow");
    checks++; if (n_flush != FRAMES) fail($sformatf("%0d flushes", n_flush));
    checks++; if (vs_seen == 0) fail("no frame marker on the port");
    begin
      int nz = 0;
      for (int z = 0; z < Z; z++) nz += zone_seen[z];
      checks++; if (nz < 4) fail($sformatf("only %0d zones seen", nz));
      $display("mechanisms: kept=%0d low_conf=%0d range=%0d zones=%0d backpressure=%0d overflow=%0d flushes=%0d",
               n_keep, n_lowc, n_oor, nz, n_bp, fifo_overflows, n_flush);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
