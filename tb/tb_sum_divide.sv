// tb_sum_divide: random per-scale sums VW_N and WW_N (two scales) go in; one
// enabled cycle later the confidence must equal sum VW and the joint depth
// Z' = sum VW / sum WW, both within FP16 rounding of the real result.
module tb_sum_divide;
  import tb_fp16_pkg::*;
  localparam int NS = 2;
  logic clk = 0, en = 0;
  logic [15:0] vw [NS], ww [NS];
  logic [15:0] conf, zp;
  always #5 clk = ~clk;
  sum_divide #(.NUM_SCALES(NS)) dut (.clk, .en, .vw, .ww, .conf, .zp);
  int checks = 0, failures = 0;
  real e_c, e_z;
  bit have = 0;

  always @(posedge clk) if (en) begin
    if (have) begin
      checks += 2;
      if (!close(fp16_to_real(conf), e_c, 0.004, 1e-4) || !close(fp16_to_real(zp), e_z, 0.006, 1e-4)) begin
        failures++;
        if (failures < 10) $display("FAIL C %f Z' %f expected %f %f", fp16_to_real(conf), fp16_to_real(zp), e_c, e_z);
      end
    end
    e_c = fp16_to_real(vw[0]) + fp16_to_real(vw[1]);
    e_z = e_c / (fp16_to_real(ww[0]) + fp16_to_real(ww[1]));
    have = 1;
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 5000; i++) begin
      real ws;
      ws = real'($urandom_range(100, 4000)) / 1000.0;
      ww[0] <= real_to_fp16(ws * real'($urandom_range(1, 99)) / 100.0);
      ww[1] <= real_to_fp16(ws * real'($urandom_range(1, 99)) / 100.0);
      vw[0] <= real_to_fp16(ws * real'($urandom_range(10, 900)) / 1000.0);
      vw[1] <= real_to_fp16(ws * real'($urandom_range(10, 900)) / 1000.0);
      en <= ($urandom_range(0, 3) != 0);
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
