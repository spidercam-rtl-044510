// delay_line: fixed delay of a pixel stream by DEPTH enabled cycles.
//
// This is the line buffer of the streaming pipeline (DEPTH = k*W delays by k
// image lines) and also the element of the latency buffers that re-align
// streams of different lag. It is a ring buffer with one write and one read
// per enabled cycle, the form an FPGA block RAM takes. dout is combinational:
// in each enabled cycle it shows the din written DEPTH enabled cycles earlier.
// DEPTH = 0 is a plain wire. rst only clears the ring pointer. The memory is not reset; the stages that read it
// mask positions outside the frame, so stale words are never used.
module delay_line #(
  parameter int WIDTH = 16,
  parameter int DEPTH = 480
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             en,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);
  if (DEPTH == 0) begin : g_wire
    assign dout = din;
  end else begin : g_ram
    localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
    logic [WIDTH-1:0] mem [DEPTH];
    logic [AW-1:0]    ptr;
    assign dout = mem[ptr];
    always_ff @(posedge clk) begin
      if (en) mem[ptr] <= din;
    end
    always_ff @(posedge clk) begin
      if (rst)     ptr <= '0;
      else if (en) ptr <= (ptr == AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
    end
  end
endmodule
