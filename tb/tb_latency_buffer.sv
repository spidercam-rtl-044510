// tb_latency_buffer: each scale stream enters tagged with the raster index of
// the pixel it carries, offset by that scale's own pipeline lag (the lag of
// the scale's input plus the lag of its stages, as the scale pipelines
// produce them). After the buffer every stream must carry the same pixel
// index, the one that trails the input by the largest lag.
module tb_latency_buffer;
  import spidercam_pkg::*;
  localparam int W = 16, NS = 2;
  logic clk = 0, rst = 1, en = 0;
  logic [15:0] vw_in [NS], ww_in [NS], vw_out [NS], ww_out [NS];
  always #5 clk = ~clk;
  latency_buffer #(.W(W), .NUM_SCALES(NS), .DX_DY_ENABLE(1)) dut (.clk, .rst, .en, .vw_in, .ww_in, .vw_out, .ww_out);
  int checks = 0, failures = 0, t = 0;
  int L [NS];
  localparam int LMAX = scales_lag_max(NS, W, 1'b1);

  always_comb
    for (int n = 0; n < NS; n++) begin
      vw_in[n] = 16'(t - L[n]);
      ww_in[n] = ~16'(t - L[n]);
    end

  always @(posedge clk) if (!rst && en) begin
    if (t >= LMAX)
      for (int n = 0; n < NS; n++) begin
        checks++;
        if (vw_out[n] !== 16'(t - LMAX) || ww_out[n] !== ~16'(t - LMAX)) begin
          failures++;
          if (failures < 10) $display("FAIL scale %0d t=%0d: %0d expected %0d", n, t, vw_out[n], t - LMAX);
        end
      end
    t <= t + 1;
  end

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < NS; n++) L[n] = scale_lag_in(n, W) + scale_lag_out(n, W, 1'b1);
    if (L[1] <= L[0]) begin failures++; $display("FAIL scale 1 is not slower than scale 0"); end
    repeat (2) @(posedge clk);
    rst <= 0;
    repeat (LMAX * 3) begin
      en <= ($urandom_range(0, 3) != 0);
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
