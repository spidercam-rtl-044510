// tb_depth_readout: bursts of depth bytes with frame markers are pushed into
// a 16-entry readout FIFO while the bridge signals ready at random. Every
// byte handed over must be the next byte of a reference queue (data and
// vsync); bytes pushed while the FIFO is full must be dropped and counted.
// Both the full case and the drained case must occur.
module tb_depth_readout;
  localparam int D = 16;
  logic clk = 0, rst = 1;
  logic in_valid = 0, in_sof = 0, port_ready = 0;
  logic [7:0] in_depth = 0, port_data;
  logic port_wr, port_vsync;
  logic [15:0] overflows;
  logic [$clog2(D):0] level;
  always #5 clk = ~clk;
  depth_readout #(.FIFO_DEPTH(D)) dut (.clk, .rst, .in_valid, .in_sof, .in_depth, .port_ready,
    .port_wr, .port_data, .port_vsync, .overflows, .level);
  int checks = 0, failures = 0, n_full = 0, n_rx = 0;
  logic [8:0] q [$];

  always @(posedge clk) if (!rst) begin
    if (port_wr) begin
      checks++; n_rx++;
      if (q.size() == 0 || {port_vsync, port_data} !== q[0]) begin
        failures++;
        if (failures < 10) $display("FAIL got %h expected %h", {port_vsync, port_data}, q.size() ? q[0] : 9'h0);
      end
      if (q.size()) void'(q.pop_front());
    end
    if (level == D) n_full++;
  end
  // reference: a push is accepted when the FIFO was not full at this edge
  always @(posedge clk) if (!rst && in_valid && level != D) q.push_back({in_sof, in_depth});

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int drops;
    drops = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int b = 0; b < 60; b++) begin
      for (int i = 0; i < $urandom_range(5, 30); i++) begin
        in_valid <= 1; in_sof <= (i == 0 && b % 6 == 0); in_depth <= 8'($urandom);
        port_ready <= ($urandom_range(0, 2) == 0);
        @(posedge clk);
        if (in_valid && level == D) drops++;
      end
      in_valid <= 0;
      repeat ($urandom_range(0, 40)) begin port_ready <= ($urandom_range(0, 1) == 0); @(posedge clk); end
    end
    in_valid <= 0; port_ready <= 1;
    repeat (D + 4) @(posedge clk);
    checks += 3;
    if (overflows != 16'(drops)) begin failures++; $display("FAIL overflows %0d expected %0d", overflows, drops); end
    if (q.size() != 0 || level != 0) begin failures++; $display("FAIL %0d bytes left", q.size()); end
    if (n_full == 0 || drops == 0) begin failures++; $display("FAIL FIFO never full"); end
    $display("bytes %0d dropped %0d", n_rx, drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
