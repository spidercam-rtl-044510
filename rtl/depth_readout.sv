// depth_readout: 8-bit parallel output port for the depth map.
//
// The depth stream leaves the pipeline at the pixel rate in bursts (one line
// per sensor line); the parallel-to-USB bridge takes one byte per cycle in
// which it signals room (port_ready, the inverted "TX FIFO empty" flag of an
// FT232H-style synchronous FIFO). A FIFO of FIFO_DEPTH bytes evens out the
// two rates. Every byte goes with a frame marker bit (port_vsync, set on the
// first pixel of a frame), like the vertical sync of an image sensor. A byte
// offered while the FIFO is full is dropped and counted in overflows.
// port_wr is high in each cycle a byte is handed over (ready and not empty).
// The paper gives the 8-bit parallel port and the bridge; the FIFO, its depth
// and the handshake are this design's choices.
module depth_readout #(
  parameter int FIFO_DEPTH = 4096
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  logic        in_sof,
  input  logic [7:0]  in_depth,
  input  logic        port_ready,
  output logic        port_wr,
  output logic [7:0]  port_data,
  output logic        port_vsync,
  output logic [15:0] overflows,
  output logic [$clog2(FIFO_DEPTH):0] level
);
  localparam int AW = $clog2(FIFO_DEPTH);
  logic [8:0]  mem [FIFO_DEPTH];
  logic [AW:0] wr_q, rd_q;
  logic        full, empty, push;

  assign level = wr_q - rd_q;
  assign full  = (level == (AW+1)'(FIFO_DEPTH));
  assign empty = (level == '0);
  assign push  = in_valid && !full;
  assign port_wr = port_ready && !empty;
  assign {port_vsync, port_data} = mem[rd_q[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push) mem[wr_q[AW-1:0]] <= {in_sof, in_depth};
  end
  always_ff @(posedge clk) begin
    if (rst) begin
      wr_q      <= '0;
      rd_q      <= '0;
      overflows <= '0;
    end else begin
      if (push) wr_q <= wr_q + 1'b1;
      if (port_wr) rd_q <= rd_q + 1'b1;
      if (in_valid && full && overflows != 16'hFFFF) overflows <= overflows + 16'd1;
    end
  end

  // the bridge never receives a byte from an empty FIFO
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) port_wr |-> !empty);
endmodule
