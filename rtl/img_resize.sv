// img_resize: nearest-neighbour downscaling of the camera frame to the
// network input size.
//
// Pixels arrive in raster order with pix_sof on the first pixel of a frame
// and pix_eol on the last pixel of each line. Along a line an accumulator
// adds OUT_W for every input pixel; when it reaches IN_W the pixel is kept
// and IN_W is subtracted. Lines are selected the same way with OUT_H and
// IN_H. Exactly OUT_W x OUT_H pixels leave per IN_W x IN_H frame, output
// pixel (ox, oy) being input pixel (ceil((ox+1)*IN_W/OUT_W)-1,
// ceil((oy+1)*IN_H/OUT_H)-1). Output is registered (one clock) and marks its
// own first pixel and line ends. Only downscaling (OUT <= IN) is supported.
// The publication states only that the frame is scaled to the network input;
// the 416x416 output follows it, the 640x480 input size and the
// nearest-neighbour method are this design's choices.
module img_resize #(
  parameter int unsigned IN_W  = 640,
  parameter int unsigned IN_H  = 480,
  parameter int unsigned OUT_W = 416,
  parameter int unsigned OUT_H = 416
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pix_valid,
  input  logic [23:0] pix_rgb,
  input  logic        pix_sof,
  input  logic        pix_eol,
  output logic        out_valid,
  output logic [23:0] out_rgb,
  output logic        out_sof,
  output logic        out_eol
);
  localparam int unsigned AW = $clog2(IN_W + OUT_W);
  localparam int unsigned AH = $clog2(IN_H + OUT_H);

  logic [AW-1:0] accx;
  logic [AH-1:0] accy, accy_n, accy_cur;
  logic          keep_line, keep_line_cur;
  logic          first_out;

  // line decision for the current line is made at its first pixel
  always_comb begin
    accy_cur      = pix_sof ? AH'(0) : accy;
    accy_n        = accy_cur + AH'(OUT_H);
    keep_line_cur = (accy_n >= AH'(IN_H));
  end

  logic line_start;     // next pixel starts a line

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      accx <= '0; accy <= '0; keep_line <= 1'b0; line_start <= 1'b1; first_out <= 1'b0;
      out_valid <= 1'b0; out_rgb <= '0; out_sof <= 1'b0; out_eol <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_eol   <= 1'b0;
      if (pix_valid) begin
        logic kl;
        logic [AW-1:0] ax;
        ax = line_start || pix_sof ? AW'(0) : accx;
        kl = (line_start || pix_sof) ? keep_line_cur : keep_line;
        if (line_start || pix_sof) begin
          keep_line <= keep_line_cur;
          accy      <= keep_line_cur ? accy_n - AH'(IN_H) : accy_n;
        end
        if (pix_sof) first_out <= 1'b1;
        if (ax + AW'(OUT_W) >= AW'(IN_W)) begin
          accx <= ax + AW'(OUT_W) - AW'(IN_W);
          if (kl) begin
            out_valid <= 1'b1;
            out_rgb   <= pix_rgb;
            out_sof   <= pix_sof || first_out;
            first_out <= 1'b0;
            out_eol   <= pix_eol;
          end
        end else begin
          accx <= ax + AW'(OUT_W);
        end
        line_start <= pix_eol;
      end
    end
  end

endmodule
