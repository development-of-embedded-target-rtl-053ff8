// max_pool: 2x2 max pooling of the 8-channel activation stream.
//
// Pixels arrive row by row, cfg_w per row, eight int8 channels per pixel.
// The horizontal maximum of the pixel and its left neighbour is kept in a
// one-row buffer; combined with the buffered value of the row above it gives
// the maximum of the 2x2 window ending at (y, x). POOL_S2 emits that window
// for odd y and odd x (stride 2, output (H/2)x(W/2)); POOL_S1 emits it for
// every y>=1, x>=1 (stride 1, output (H-1)x(W-1)); POOL_NONE passes every
// pixel. Output registered: one clock latency.
// The paper names the layer (2x2 max pooling of YOLOv3-Tiny); the streaming
// organisation is this design's. The stride-1 mode does not reproduce the
// one-pixel right/bottom border of the reference network, which keeps the map
// at 13x13; the host pads the map for that layer.
module max_pool
  import yolo_pkg::*;
#(
  parameter int unsigned LANES = N_FILT,
  parameter int unsigned MAX_W = 416
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  pool_mode_e    mode,
  input  logic [11:0]   cfg_w,     // pixels per input row
  input  logic          in_valid,
  input  q8_t           d [LANES],
  output logic          out_valid,
  output q8_t           q [LANES]
);
  localparam int unsigned XW = $clog2(MAX_W);
  logic [11:0] x, y;
  logic [XW-1:0] xi;
  assign xi = XW'(x);
  q8_t prev [LANES];
  q8_t row  [MAX_W][LANES];
  q8_t hmax [LANES];
  q8_t wmax [LANES];
  logic emit;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      hmax[l] = (x != 0 && prev[l] > d[l]) ? prev[l] : d[l];
      wmax[l] = (row[xi][l] > hmax[l]) ? row[xi][l] : hmax[l];
    end
    unique case (mode)
      POOL_S2: emit = x[0] && y[0];
      POOL_S1: emit = (x != 0) && (y != 0);
      default: emit = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; y <= '0;
    end else if (start) begin
      x <= '0; y <= '0;
    end else if (in_valid) begin
      if (x == cfg_w - 12'd1) begin
        x <= '0;
        y <= y + 12'd1;
      end else begin
        x <= x + 12'd1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      prev   <= d;
      row[xi] <= hmax;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int l = 0; l < LANES; l++) q[l] <= '0;
    end else begin
      out_valid <= in_valid && emit;
      if (in_valid) q <= (mode == POOL_NONE) ? d : wmax;
    end
  end
endmodule
