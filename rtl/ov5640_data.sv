// ov5640_data: capture of the camera's parallel pixel bus.
//
// The sensor sends RGB565 pixels as two bytes, high byte first, on an 8-bit
// bus, qualified by HREF (line active) and framed by VSYNC. This block pairs
// the bytes, widens RGB565 to RGB888 by repeating the top bits of each
// component, and marks the first pixel of a frame (sof) and the last pixel of
// a line (eol). It runs in the camera pixel clock domain: every input is
// sampled on cam_pclk. A rising VSYNC restarts the byte pairing. pix_valid
// is high for one clock per pixel, two clocks after its second byte.
// The publication names this block and its place (camera to video input and
// scaler); the RGB565 format and this framing are this design's choices, the
// format being the usual one for this sensor.
module ov5640_data (
  input  logic        cam_pclk,
  input  logic        rst_n,
  input  logic        cam_vsync,
  input  logic        cam_href,
  input  logic [7:0]  cam_data,
  output logic        pix_valid,
  output logic [23:0] pix_rgb,     // {R, G, B}, 8 bits each
  output logic        pix_sof,     // first pixel of a frame
  output logic        pix_eol      // last pixel of a line
);
  logic       vsync_q, href_q;
  logic [7:0] data_q;
  logic       phase;               // 0: expecting high byte
  logic [7:0] hi;
  logic       first;               // next pixel is the first of the frame

  // register the pad inputs once
  always_ff @(posedge cam_pclk or negedge rst_n) begin
    if (!rst_n) begin
      vsync_q <= 1'b0; href_q <= 1'b0; data_q <= '0;
    end else begin
      vsync_q <= cam_vsync;
      href_q  <= cam_href;
      data_q  <= cam_data;
    end
  end

  logic [15:0] rgb565;
  assign rgb565 = {hi, data_q};

  always_ff @(posedge cam_pclk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= 1'b0; hi <= '0; first <= 1'b0;
      pix_valid <= 1'b0; pix_rgb <= '0; pix_sof <= 1'b0; pix_eol <= 1'b0;
    end else begin
      pix_valid <= 1'b0;
      pix_eol   <= 1'b0;
      if (cam_vsync && !vsync_q) begin
        first <= 1'b1;
        phase <= 1'b0;
      end
      if (href_q) begin
        if (!phase) begin
          hi    <= data_q;
          phase <= 1'b1;
        end else begin
          phase     <= 1'b0;
          pix_valid <= 1'b1;
          pix_rgb   <= {rgb565[15:11], rgb565[15:13],
                        rgb565[10:5],  rgb565[10:9],
                        rgb565[4:0],   rgb565[4:2]};
          pix_sof   <= first;
          first     <= 1'b0;
          pix_eol   <= !cam_href;   // HREF falls after this byte
        end
      end else begin
        phase <= 1'b0;
      end
    end
  end

endmodule
