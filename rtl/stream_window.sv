// stream_window: the taps of a one-dimensional sliding window on a raster
// stream, with taps outside the image forced to zero.
//
// DIR = 0 slides along a line: the taps are the last samples of the stream,
// held in a shift register. DIR = 1 slides down a column: the taps are the
// outputs of a chain of line buffers, each DIL*W samples long. Tap offsets run
// OMIN..OMAX around the window centre, spaced DIL apart (DIL > 1 gives the
// zero-interleaved kernels of the coarser scales). taps[i] is offset OMIN+i.
// The centre trails the newest sample (offset OMAX) by OMAX*DIL samples or
// lines, so the centre position has lag LAT_IN + OMAX*DIL (DIR = 0) or
// LAT_IN + OMAX*DIL*W (DIR = 1); a tap whose position falls outside the W x H
// frame reads as zero, which is the same as convolving the zero-padded image
// and cropping back to W x H.
module stream_window #(
  parameter int DW     = 16,
  parameter int W      = 480,
  parameter int H      = 400,
  parameter bit DIR    = 0,
  parameter int OMIN   = -2,
  parameter int OMAX   = 2,
  parameter int DIL    = 1,
  parameter int LAT_IN = 0,
  localparam int NT    = OMAX - OMIN + 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          en,
  input  logic          sof,
  input  logic [DW-1:0] din,
  output logic [DW-1:0] taps [NT],
  output logic [15:0]   cx,
  output logic [15:0]   cy
);
  localparam int NK   = (OMAX - OMIN) * DIL;   // age of the oldest tap, in steps
  localparam int CLAG = DIR ? OMAX * DIL * W : OMAX * DIL;

  logic [DW-1:0] age [NK+1];                  // age[k]: k steps old
  logic          started;

  raster_pos #(.W(W), .H(H), .OFFSET(LAT_IN + CLAG)) u_pos (
    .clk, .rst, .en, .sof, .started, .x(cx), .y(cy)
  );

  assign age[0] = din;
  if (DIR == 0) begin : g_h
    logic [DW-1:0] sr [NK];
    always_ff @(posedge clk) begin
      if (en) begin
        sr[0] <= din;
        for (int k = 1; k < NK; k++) sr[k] <= sr[k-1];
      end
    end
    for (genvar k = 1; k <= NK; k++) begin : g_a
      assign age[k] = sr[k-1];
    end
  end else begin : g_v
    // only every DIL-th line of delay is tapped
    logic [DW-1:0] lb [OMAX-OMIN+1];
    assign lb[0] = din;
    for (genvar j = 1; j <= OMAX - OMIN; j++) begin : g_lb
      delay_line #(.WIDTH(DW), .DEPTH(DIL * W)) u_lb (
        .clk, .rst, .en, .din(lb[j-1]), .dout(lb[j])
      );
    end
    for (genvar k = 0; k <= NK; k++) begin : g_a
      if (k % DIL == 0) begin : g_t
        if (k > 0) begin : g_n
          assign age[k] = lb[k / DIL];
        end
      end else begin : g_z
        assign age[k] = '0;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NT; i++) begin
      int o, p;
      o = OMIN + i;
      p = (DIR ? int'(cy) : int'(cx)) + o * DIL;
      taps[i] = (started && p >= 0 && p < (DIR ? H : W)) ? age[(OMAX - o) * DIL] : '0;
    end
  end
endmodule
