// tb_detect_system: the whole programmable-logic system at its default
// sizes, with its three clock domains running at the same time.
//  * Camera domain: one full 640x480 RGB565 frame with line blanking; every
//    full-size pixel is checked against its RGB888 expansion and every
//    pixel of the 416x416 scaled frame against the source pixel it should
//    come from, with frame and line marks and both pixel counts.
//  * Accelerator domain: the host model loads and runs a 13x13 layer over
//    two channel batches with stride-2 pooling and a 13x13 layer with
//    stride-1 pooling, comparing every output beat.
//  * Display domain: boxes are written over the box port and a video frame
//    is checked pixel by pixel for the red outlines.
// Mechanism counts are printed at the end.
module tb_detect_system;
  import yolo_pkg::*;
  // camera domain
  logic cam_pclk = 0, cam_rst_n = 0, cam_vsync = 0, cam_href = 0;
  logic [7:0] cam_data = 0;
  logic cap_valid, cap_sof, cap_eol, net_valid, net_sof, net_eol;
  logic [23:0] cap_rgb, net_rgb;
  // accelerator domain
  logic clk = 0, rst_n = 0;
  logic [7:0]  s_axil_awaddr = 0, s_axil_araddr = 0;
  logic        s_axil_awvalid = 0, s_axil_wvalid = 0, s_axil_bready = 0, s_axil_arvalid = 0, s_axil_rready = 0;
  logic [31:0] s_axil_wdata = 0, s_axil_rdata;
  logic [3:0]  s_axil_wstrb = 0;
  logic        s_axil_awready, s_axil_wready, s_axil_bvalid, s_axil_arready, s_axil_rvalid;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic [63:0] s_axis_tdata = 0, m_axis_tdata, us_s_axis_tdata = 0, us_m_axis_tdata;
  logic s_axis_tvalid = 0, s_axis_tlast = 0, s_axis_tready;
  logic m_axis_tvalid, m_axis_tlast, m_axis_tready = 1;
  logic us_s_axis_tvalid = 0, us_s_axis_tready, us_m_axis_tvalid, us_m_axis_tlast, us_m_axis_tready = 1;
  logic busy, rx_stall;
  // display domain
  logic vid_clk = 0, vid_rst_n = 0;
  logic [7:0]  box_awaddr = 0, box_araddr = 0;
  logic        box_awvalid = 0, box_wvalid = 0, box_bready = 0, box_arvalid = 0, box_rready = 0;
  logic [31:0] box_wdata = 0, box_rdata;
  logic        box_awready, box_wready, box_bvalid, box_arready, box_rvalid;
  logic [1:0]  box_bresp, box_rresp;
  logic vid_active = 0, vid_hsync = 0, vid_vsync = 0;
  logic [23:0] vid_rgb = 0;
  logic hdmi_active, hdmi_hsync, hdmi_vsync;
  logic [23:0] hdmi_rgb;

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_multibatch = 0, n_wrap = 0, n_pool_s2 = 0, n_pool_s1 = 0, n_pool_none = 0;
  int n_act_on = 0, n_act_off = 0, n_1x1 = 0, n_stall_cycles = 0, n_upsample = 0;
  int n_cap = 0, n_net = 0, n_red = 0;

  always #6 cam_pclk = ~cam_pclk;
  always #5 clk = ~clk;
  always #7 vid_clk = ~vid_clk;
  always @(posedge clk) begin
    cyc++;
    if (rx_stall) n_stall_cycles++;
  end

  detect_system dut (.*);

  `include "axil_master.svh"

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  `include "yolo_host.svh"

  // ---------------- camera ----------------
  localparam int CW = 640, CH = 480, NW = 416, NH = 416;
  logic [23:0] img [CH][CW];
  always @(posedge cam_pclk) if (cam_rst_n && cap_valid) begin
    int x, y;
    x = n_cap % CW; y = n_cap / CW;
    checks++;
    if (cap_rgb !== img[y][x] || cap_sof != (n_cap == 0) || cap_eol != (x == CW - 1)) begin
      failures++;
      $display("capture (%0d,%0d) got %h exp %h", x, y, cap_rgb, img[y][x]);
    end
    n_cap++;
  end
  always @(posedge cam_pclk) if (cam_rst_n && net_valid) begin
    int ox, oy, sx, sy;
    ox = n_net % NW; oy = n_net / NW;
    sx = ((ox + 1) * CW + NW - 1) / NW - 1;
    sy = ((oy + 1) * CH + NH - 1) / NH - 1;
    checks++;
    if (net_rgb !== img[sy][sx] || net_sof != (n_net == 0) || net_eol != (ox == NW - 1)) begin
      failures++;
      $display("scaled (%0d,%0d) got %h exp %h", ox, oy, net_rgb, img[sy][sx]);
    end
    n_net++;
  end

  task automatic camera_frame();
    @(negedge cam_pclk) cam_vsync = 1;
    repeat (4) @(negedge cam_pclk);
    cam_vsync = 0;
    repeat (6) @(negedge cam_pclk);
    for (int y = 0; y < CH; y++) begin
      for (int x = 0; x < CW; x++) begin
        logic [15:0] p;
        p = 16'($urandom);
        img[y][x] = {p[15:11], p[15:13], p[10:5], p[10:9], p[4:0], p[4:2]};
        cam_href = 1; cam_data = p[15:8];
        @(negedge cam_pclk) cam_data = p[7:0];
        @(negedge cam_pclk);
      end
      cam_href = 0;
      repeat (4) @(negedge cam_pclk);
    end
    repeat (5) @(negedge cam_pclk);
    chk(n_cap == CW * CH, "full-size pixel count");
    chk(n_net == NW * NH, "scaled pixel count");
  endtask

  // ---------------- display ----------------
  localparam int VW = 96, VH = 64;
  int bx [2][4] = '{'{10, 8, 40, 30}, '{50, 20, 90, 60}};

  task automatic box_write(input logic [7:0] addr, input logic [31:0] data);
    @(negedge vid_clk);
    box_awaddr = addr; box_awvalid = 1; box_wdata = data; box_wvalid = 1; box_bready = 1;
    do @(posedge vid_clk); while (!(box_awready && box_wready));
    @(negedge vid_clk);
    box_awvalid = 0; box_wvalid = 0;
    while (!box_bvalid) @(negedge vid_clk);
    @(negedge vid_clk);
    box_bready = 0;
  endtask

  function automatic bit edge_px(int x, int y);
    for (int i = 0; i < 2; i++)
      if (x >= bx[i][0] && x <= bx[i][2] && y >= bx[i][1] && y <= bx[i][3] &&
          (x < bx[i][0] + 2 || x > bx[i][2] - 2 || y < bx[i][1] + 2 || y > bx[i][3] - 2)) return 1;
    return 0;
  endfunction

  task automatic video_frame();
    for (int i = 0; i < 2; i++) begin
      box_write(8'(8 * i),     {4'd0, 12'(bx[i][1]), 4'd0, 12'(bx[i][0])});
      box_write(8'(8 * i + 4), {1'b1, 3'd0, 12'(bx[i][3]), 4'd0, 12'(bx[i][2])});
    end
    @(negedge vid_clk) vid_vsync = 1;
    repeat (3) @(negedge vid_clk);
    vid_vsync = 0;
    repeat (4) @(negedge vid_clk);
    for (int y = 0; y < VH; y++) begin
      for (int x = 0; x < VW; x++) begin
        logic [23:0] p;
        p = 24'($urandom) & 24'h7FFFFF;
        vid_active = 1; vid_rgb = p;
        @(negedge vid_clk);
        checks++;
        if (!hdmi_active || hdmi_rgb !== (edge_px(x, y) ? 24'hFF0000 : p)) begin
          failures++; $display("video (%0d,%0d) got %h", x, y, hdmi_rgb);
        end
        if (edge_px(x, y)) n_red++;
      end
      vid_active = 0; vid_hsync = 1;
      repeat (2) @(negedge vid_clk);
      vid_hsync = 0;
      repeat (3) @(negedge vid_clk);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    cam_rst_n = 1; rst_n = 1; vid_rst_n = 1;
    fork
      camera_frame();
      begin
        //        w   h  nb wbase bgroup pool      act 1x1 hold
        run_pass(13, 13, 2,   0,  0,     POOL_S2,  1,  0,  0);
        run_pass(13, 13, 1, 100,  2,     POOL_S1,  1,  0,  0);
      end
      video_frame();
    join
    chk(n_multibatch > 0, "mechanism: channel batches accumulated");
    chk(n_pool_s2 > 0,    "mechanism: 2x2 stride-2 pooling");
    chk(n_pool_s1 > 0,    "mechanism: 2x2 stride-1 pooling");
    chk(n_red > 0,        "mechanism: box outline drawn");
    $display("mechanisms: captured=%0d scaled=%0d batches=%0d s2=%0d s1=%0d act=%0d red_pixels=%0d",
             n_cap, n_net, n_multibatch, n_pool_s2, n_pool_s1, n_act_on, n_red);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
