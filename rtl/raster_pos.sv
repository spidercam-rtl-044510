// raster_pos: raster position of a stream that trails the frame start by a
// fixed number of enabled cycles.
//
// The pipeline moves one raster position per enabled cycle (en). A stage whose
// data lags the frame start by OFFSET enabled cycles sees position (0,0) in the
// enabled cycle with index OFFSET, counting the cycle that carries sof as index
// 0. This helper keeps that position in counters, so no stage has to carry
// (x, y) alongside its pixels. Outputs are combinational and describe the
// current cycle: started is high from index OFFSET on, x runs 0..W-1 and y
// counts rows, saturating at H (rows beyond the frame are the pipeline flush).
module raster_pos #(
  parameter int W      = 480,
  parameter int H      = 400,
  parameter int OFFSET = 0
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  input  logic        sof,
  output logic        started,
  output logic [15:0] x,
  output logic [15:0] y
);
  logic [31:0] pre_q, pre_c;
  logic [15:0] x_q, y_q;

  always_comb begin
    pre_c   = sof ? 32'(OFFSET) : pre_q;
    started = (pre_c == 32'd0);
    x       = (sof || !started) ? 16'd0 : x_q;
    y       = (sof || !started) ? 16'd0 : y_q;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pre_q <= 32'(OFFSET);
      x_q   <= '0;
      y_q   <= 16'(H);
    end else if (en) begin
      if (!started) begin
        pre_q <= pre_c - 32'd1;
        x_q   <= '0;
        y_q   <= '0;
      end else if (x == 16'(W - 1)) begin
        x_q <= '0;
        y_q <= (y >= 16'(H)) ? 16'(H) : y + 16'd1;
      end else begin
        x_q <= x + 16'd1;
        y_q <= y;
      end
    end
  end
endmodule
