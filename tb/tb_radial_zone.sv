// tb_radial_zone: the tracked squared radius and the zone index are compared
// with a direct computation from the raster position for every pixel of two
// frames (enable gaps included), with an off-centre optical centre and random
// increasing ring thresholds. A second instance with RADIAL_ENABLE = 0 must
// report zone 0 everywhere.
module tb_radial_zone;
  localparam int W = 20, H = 14, Z = 4, OFF = 5;
  logic clk = 0, rst = 1, en = 0, sof = 0;
  logic [15:0] cx = 7, cy = 9;
  logic [31:0] thr [Z];
  logic [1:0]  zone, zone_off;
  logic [31:0] r2, r2_off;
  always #5 clk = ~clk;
  radial_zone #(.W(W), .H(H), .ZONES(Z), .OFFSET(OFF)) dut (
    .clk, .rst, .en, .sof, .ctr_x(cx), .ctr_y(cy), .r2_thr(thr), .zone, .r2);
  radial_zone #(.W(W), .H(H), .ZONES(Z), .OFFSET(OFF), .RADIAL_ENABLE(0)) u_off (
    .clk, .rst, .en, .sof, .ctr_x(cx), .ctr_y(cy), .r2_thr(thr), .zone(zone_off), .r2(r2_off));
  int checks = 0, failures = 0, t = 0;
  int seen [Z];

  always @(posedge clk) if (!rst && en) begin
    int p, x, y, er2, ez;
    if (sof) t = 0;
    p = t - OFF;
    if (p >= 0 && p < W * H) begin
      x = p % W; y = p / W;
      er2 = (x - int'(cx)) ** 2 + (y - int'(cy)) ** 2;
      ez = Z - 1;
      for (int z = Z - 1; z >= 0; z--) if (er2 < int'(thr[z])) ez = z;
      seen[ez]++;
      checks += 3;
      if (r2 != 32'(er2) || zone != 2'(ez) || zone_off != 0) begin
        failures++;
        if (failures < 10) $display("FAIL (%0d,%0d): r2 %0d zone %0d expected %0d %0d", x, y, r2, zone, er2, ez);
      end
    end
    t++;
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    thr[0] = $urandom_range(4, 20);
    for (int z = 1; z < Z; z++) thr[z] = thr[z-1] + $urandom_range(10, 40);
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < 2; f++)
      for (int i = 0; i < W * H + OFF + 3; i++) begin
        if ($urandom_range(0, 3) == 0) begin en <= 0; @(posedge clk); end
        en <= 1; sof <= (i == 0);
        @(posedge clk);
      end
    en <= 0; @(posedge clk);
    for (int z = 0; z < Z; z++) if (seen[z] == 0) begin failures++; $display("FAIL zone %0d never seen", z); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
