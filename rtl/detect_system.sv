// detect_system: the programmable-logic part of the face-detection system.
//
// Three independent paths share the device:
//  * Capture: ov5640_data turns the camera's byte bus into RGB888 pixels.
//    The full-size frame leaves on cap_* (towards the video input converter
//    and the frame buffer for display) and, scaled by img_resize to the
//    416x416 network input, on net_* (towards the frame buffer that feeds
//    the accelerator). Both run in the camera pixel clock domain.
//  * Inference: yolo_net, the convolution accelerator, with its AXI4-Lite
//    control port and AXI4-Stream data ports for the DMA, in the clk domain.
//  * Display: yolo_box draws the detection boxes, written by the processor
//    over AXI4-Lite, into the video coming from the stream-to-video
//    converter, on its way to the HDMI transmitter, in the vid_clk domain.
// The processor, DDR3, DMA, frame-buffer DMA, video converters, timing
// controller, GPIO camera configuration and HDMI transmitter are outside:
// their connections are the ports of this module. No signal crosses between
// the clock domains inside it.
// The set of blocks and their connections follow the publication's system
// diagram; the capture format and the split into three clock domains are
// this design's choices.
module detect_system
  import yolo_pkg::*;
(
  // ---- camera pixel clock domain ----
  input  logic               cam_pclk,
  input  logic               cam_rst_n,
  input  logic               cam_vsync,
  input  logic               cam_href,
  input  logic [7:0]         cam_data,
  output logic               cap_valid,     // full-size frame
  output logic [23:0]        cap_rgb,
  output logic               cap_sof,
  output logic               cap_eol,
  output logic               net_valid,     // frame scaled to 416x416
  output logic [23:0]        net_rgb,
  output logic               net_sof,
  output logic               net_eol,
  // ---- accelerator clock domain ----
  input  logic               clk,
  input  logic               rst_n,
  input  logic [7:0]         s_axil_awaddr,
  input  logic               s_axil_awvalid,
  output logic               s_axil_awready,
  input  logic [31:0]        s_axil_wdata,
  input  logic [3:0]         s_axil_wstrb,
  input  logic               s_axil_wvalid,
  output logic               s_axil_wready,
  output logic [1:0]         s_axil_bresp,
  output logic               s_axil_bvalid,
  input  logic               s_axil_bready,
  input  logic [7:0]         s_axil_araddr,
  input  logic               s_axil_arvalid,
  output logic               s_axil_arready,
  output logic [31:0]        s_axil_rdata,
  output logic [1:0]         s_axil_rresp,
  output logic               s_axil_rvalid,
  input  logic               s_axil_rready,
  input  logic [AXIS_W-1:0]  s_axis_tdata,
  input  logic               s_axis_tvalid,
  input  logic               s_axis_tlast,
  output logic               s_axis_tready,
  output logic [AXIS_W-1:0]  m_axis_tdata,
  output logic               m_axis_tvalid,
  output logic               m_axis_tlast,
  input  logic               m_axis_tready,
  input  logic [AXIS_W-1:0]  us_s_axis_tdata,
  input  logic               us_s_axis_tvalid,
  output logic               us_s_axis_tready,
  output logic [AXIS_W-1:0]  us_m_axis_tdata,
  output logic               us_m_axis_tvalid,
  output logic               us_m_axis_tlast,
  input  logic               us_m_axis_tready,
  output logic               busy,
  output logic               rx_stall,
  // ---- display clock domain ----
  input  logic               vid_clk,
  input  logic               vid_rst_n,
  input  logic [7:0]         box_awaddr,
  input  logic               box_awvalid,
  output logic               box_awready,
  input  logic [31:0]        box_wdata,
  input  logic               box_wvalid,
  output logic               box_wready,
  output logic [1:0]         box_bresp,
  output logic               box_bvalid,
  input  logic               box_bready,
  input  logic [7:0]         box_araddr,
  input  logic               box_arvalid,
  output logic               box_arready,
  output logic [31:0]        box_rdata,
  output logic [1:0]         box_rresp,
  output logic               box_rvalid,
  input  logic               box_rready,
  input  logic               vid_active,
  input  logic               vid_hsync,
  input  logic               vid_vsync,
  input  logic [23:0]        vid_rgb,
  output logic               hdmi_active,
  output logic               hdmi_hsync,
  output logic               hdmi_vsync,
  output logic [23:0]        hdmi_rgb
);
  // ---------------- capture ----------------
  ov5640_data u_ov5640_data (
    .cam_pclk, .rst_n (cam_rst_n), .cam_vsync, .cam_href, .cam_data,
    .pix_valid (cap_valid), .pix_rgb (cap_rgb), .pix_sof (cap_sof), .pix_eol (cap_eol)
  );

  img_resize u_img_resize (
    .clk (cam_pclk), .rst_n (cam_rst_n),
    .pix_valid (cap_valid), .pix_rgb (cap_rgb), .pix_sof (cap_sof), .pix_eol (cap_eol),
    .out_valid (net_valid), .out_rgb (net_rgb), .out_sof (net_sof), .out_eol (net_eol)
  );

  // ---------------- inference ----------------
  yolo_net u_yolo_net (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready, .s_axil_wdata, .s_axil_wstrb,
    .s_axil_wvalid, .s_axil_wready, .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready, .s_axil_rdata, .s_axil_rresp,
    .s_axil_rvalid, .s_axil_rready,
    .s_axis_tdata, .s_axis_tvalid, .s_axis_tlast, .s_axis_tready,
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tlast, .m_axis_tready,
    .us_s_axis_tdata, .us_s_axis_tvalid, .us_s_axis_tready,
    .us_m_axis_tdata, .us_m_axis_tvalid, .us_m_axis_tlast, .us_m_axis_tready,
    .busy, .rx_stall
  );

  // ---------------- display ----------------
  yolo_box u_yolo_box (
    .clk (vid_clk), .rst_n (vid_rst_n),
    .s_awaddr (box_awaddr), .s_awvalid (box_awvalid), .s_awready (box_awready),
    .s_wdata (box_wdata), .s_wvalid (box_wvalid), .s_wready (box_wready),
    .s_bresp (box_bresp), .s_bvalid (box_bvalid), .s_bready (box_bready),
    .s_araddr (box_araddr), .s_arvalid (box_arvalid), .s_arready (box_arready),
    .s_rdata (box_rdata), .s_rresp (box_rresp), .s_rvalid (box_rvalid), .s_rready (box_rready),
    .vid_active, .vid_hsync, .vid_vsync, .vid_rgb,
    .out_active (hdmi_active), .out_hsync (hdmi_hsync), .out_vsync (hdmi_vsync), .out_rgb (hdmi_rgb)
  );
endmodule
