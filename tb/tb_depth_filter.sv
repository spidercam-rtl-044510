// tb_depth_filter: random Z' and confidence values are streamed over a small
// frame with four radial zones, each with its own confidence threshold and
// depth range. For every pixel the keep / low-confidence / out-of-range flags
// and the 8-bit depth code (round(Z' * scale) clamped to 1..255, 0 when
// dropped) are compared with a reference computed from the pixel's zone.
module tb_depth_filter;
  import tb_fp16_pkg::*;
  localparam int W = 16, H = 12, Z = 4, LAT = 2;
  logic clk = 0, rst = 1, en = 0, sof = 0;
  logic [15:0] zp = 0, conf = 0, c_thr [Z], z_min [Z], z_max [Z], depth_scale;
  logic [15:0] cx = 8, cy = 6;
  logic [31:0] r2_thr [Z];
  logic [7:0]  depth;
  logic keep, low_conf, out_of_range;
  logic [15:0] zp_q, conf_q;
  always #5 clk = ~clk;
  depth_filter #(.W(W), .H(H), .ZONES(Z), .LAT_IN(LAT)) dut (
    .clk, .rst, .en, .sof, .zp, .conf, .c_thr, .z_min, .z_max, .depth_scale,
    .ctr_x(cx), .ctr_y(cy), .r2_thr, .depth, .keep, .low_conf, .out_of_range, .zp_q, .conf_q);
  int checks = 0, failures = 0, t = 0, n_keep = 0, n_lc = 0, n_oor = 0;
  logic [15:0] pz, pc;

  function automatic int zone_of(int x, int y);
    int r2;
    r2 = (x - 8) ** 2 + (y - 6) ** 2;
    for (int z = 0; z < Z; z++) if (r2 < int'(r2_thr[z])) return z;
    return Z - 1;
  endfunction

  always @(posedge clk) if (!rst && en) begin
    int p;
    if (sof) t = 0;
    p = t - 1 - LAT;
    if (t >= 1 && p >= 0 && p < W * H) begin
      int z, ecode;
      bit elc, eoor;
      real rz;
      z = zone_of(p % W, p / W);
      rz = fp16_to_real(pz);
      elc = fp16_to_real(pc) < fp16_to_real(c_thr[z]);
      eoor = !(rz > fp16_to_real(z_min[z]) && rz < fp16_to_real(z_max[z]));
      ecode = int'(rz * 250.0);
      if (ecode > 255) ecode = 255;
      if (ecode < 1) ecode = 1;
      checks++;
      if (low_conf !== elc || out_of_range !== eoor || keep !== (!elc && !eoor) || zp_q !== pz) begin
        failures++;
        if (failures < 10) $display("FAIL flags p=%0d zone %0d: %b%b%b expected lc=%b oor=%b", p, z, keep, low_conf, out_of_range, elc, eoor);
      end
      checks++;
      if (keep && (int'(depth) < ecode - 1 || int'(depth) > ecode + 1)) begin failures++; $display("FAIL code %0d expected %0d", depth, ecode); end
      if (!keep && depth != 0) begin failures++; $display("FAIL dropped pixel with code %0d", depth); end
      n_keep += keep; n_lc += low_conf; n_oor += (out_of_range && !low_conf);
    end
    pz = zp; pc = conf;
    t++;
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    depth_scale = real_to_fp16(250.0);
    for (int z = 0; z < Z; z++) begin
      r2_thr[z] = 32'((2 * z + 2) ** 2);
      c_thr[z]  = real_to_fp16(0.1 * (z + 1));
      z_min[z]  = real_to_fp16(0.2 + 0.05 * z);
      z_max[z]  = real_to_fp16(1.2 - 0.1 * z);
    end
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < 3; f++)
      for (int i = 0; i < W * H + LAT + 2; i++) begin
        if ($urandom_range(0, 3) == 0) begin en <= 0; @(posedge clk); end
        en <= 1; sof <= (i == 0);
        zp   <= real_to_fp16(real'($urandom_range(1, 1400)) / 1000.0 + 0.0003);
        conf <= real_to_fp16(real'($urandom_range(1, 600)) / 1000.0 + 0.0003);
        @(posedge clk);
      end
    en <= 0; @(posedge clk);
    if (n_keep == 0 || n_lc == 0 || n_oor == 0) begin failures++; $display("FAIL a case never happened"); end
    $display("kept %0d low-confidence %0d out-of-range %0d", n_keep, n_lc, n_oor);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
