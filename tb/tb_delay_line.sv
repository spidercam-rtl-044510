// tb_delay_line: the delay line must return each word exactly DEPTH enabled
// cycles after it was written, with random gaps in the enable. Three depths
// are tested: 0 (a wire), 1 and a line length that is not a power of two.
module tb_delay_line;
  logic clk = 0, rst = 1, en = 0;
  logic [15:0] din = 0;
  logic [15:0] d0, d1, d2;
  always #5 clk = ~clk;
  localparam int D2 = 37;
  delay_line #(.WIDTH(16), .DEPTH(0))  u0 (.clk, .rst, .en, .din, .dout(d0));
  delay_line #(.WIDTH(16), .DEPTH(1))  u1 (.clk, .rst, .en, .din, .dout(d1));
  delay_line #(.WIDTH(16), .DEPTH(D2)) u2 (.clk, .rst, .en, .din, .dout(d2));
  int checks = 0, failures = 0, t = 0;
  logic [15:0] hist [$];

  task automatic chk(logic [15:0] got, logic [15:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s at t=%0d: %h expected %h", what, t, got, exp);
    end
  endtask

  always @(posedge clk) if (!rst && en) begin
    hist.push_back(din);
    chk(d0, din, "depth 0");
    if (t >= 1)  chk(d1, hist[t - 1], "depth 1");
    if (t >= D2) chk(d2, hist[t - D2], "depth 37");
    t++;
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    repeat (2000) begin
      @(posedge clk);
      en  <= ($urandom_range(0, 3) != 0);
      din <= 16'($urandom);
    end
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
