// tb_zero_inserter: a scale-1 zero inserter on a small frame. A random FP16
// stream is fed with enable gaps over two frames; a pixel must pass only where
// x and y are both multiples of 4 (2^(SCALE+1)) and be zero elsewhere, one
// enabled cycle later, with the raster position taken from LAT_IN.
module tb_zero_inserter;
  localparam int W = 12, H = 8, SCALE = 1, LAT = 3;
  logic clk = 0, rst = 1, en = 0, sof = 0;
  logic [15:0] din = 0, dout;
  always #5 clk = ~clk;
  zero_inserter #(.W(W), .H(H), .SCALE(SCALE), .LAT_IN(LAT)) dut (.clk, .rst, .en, .sof, .din, .dout);
  int checks = 0, failures = 0, t = 0, n_keep = 0;
  logic [15:0] prev;

  always @(posedge clk) if (!rst && en) begin
    if (sof) t = 0;
    if (t >= 1) begin
      int p, x, y;
      logic [15:0] e;
      p = t - 1 - LAT;
      if (p >= 0 && p < W * H) begin
        x = p % W; y = p / W;
        e = (x % 4 == 0 && y % 4 == 0) ? prev : 16'h0000;
        if (e != 0) n_keep++;
        checks++;
        if (dout !== e) begin
          failures++;
          if (failures < 10) $display("FAIL (%0d,%0d): %h expected %h", x, y, dout, e);
        end
      end
    end
    prev = din;
    t++;
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < 2; f++)
      for (int i = 0; i < W * H + LAT + 2; i++) begin
        if ($urandom_range(0, 3) == 0) begin en <= 0; @(posedge clk); end
        en <= 1; sof <= (i == 0); din <= 16'($urandom_range(1, 16'h7BFF));
        @(posedge clk);
      end
    en <= 0; @(posedge clk);
    if (n_keep != 2 * 3 * 2) begin failures++; $display("FAIL kept %0d pixels", n_keep); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
