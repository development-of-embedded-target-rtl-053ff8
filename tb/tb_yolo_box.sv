// tb_yolo_box: writes three boxes (one disabled) over AXI4-Lite, reads them
// back, then sends two video frames with blanking and checks every output
// pixel: red on the 2-pixel inner outline of an enabled box, unchanged
// elsewhere, with the sync signals delayed by one clock.
module tb_yolo_box;
  logic clk = 0, rst_n = 0;
  logic [7:0]  s_axil_awaddr = 0, s_axil_araddr = 0;
  logic        s_axil_awvalid = 0, s_axil_wvalid = 0, s_axil_bready = 0, s_axil_arvalid = 0, s_axil_rready = 0;
  logic [31:0] s_axil_wdata = 0, s_axil_rdata;
  logic [3:0]  s_axil_wstrb = 0;
  logic        s_axil_awready, s_axil_wready, s_axil_bvalid, s_axil_arready, s_axil_rvalid;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic vid_active = 0, vid_hsync = 0, vid_vsync = 0;
  logic [23:0] vid_rgb = 0;
  logic out_active, out_hsync, out_vsync;
  logic [23:0] out_rgb;
  int checks = 0, failures = 0, red = 0;
  int bx [3][4] = '{'{3, 2, 12, 9}, '{20, 5, 30, 20}, '{0, 0, 39, 29}};
  bit ben [3] = '{1, 1, 0};

  always #5 clk = ~clk;
  yolo_box dut (.clk, .rst_n,
    .s_awaddr(s_axil_awaddr), .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata(s_axil_wdata), .s_wvalid(s_axil_wvalid), .s_wready(s_axil_wready),
    .s_bresp(s_axil_bresp), .s_bvalid(s_axil_bvalid), .s_bready(s_axil_bready),
    .s_araddr(s_axil_araddr), .s_arvalid(s_axil_arvalid), .s_arready(s_axil_arready),
    .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp), .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready),
    .vid_active, .vid_hsync, .vid_vsync, .vid_rgb, .out_active, .out_hsync, .out_vsync, .out_rgb);

  `include "axil_master.svh"

  function automatic bit edge_px(int x, int y);
    for (int i = 0; i < 3; i++)
      if (ben[i] && x >= bx[i][0] && x <= bx[i][2] && y >= bx[i][1] && y <= bx[i][3] &&
          (x < bx[i][0] + 2 || x > bx[i][2] - 2 || y < bx[i][1] + 2 || y > bx[i][3] - 2)) return 1;
    return 0;
  endfunction

  task automatic frame(int w, int h);
    @(negedge clk) vid_vsync = 1;
    repeat (3) @(negedge clk);
    vid_vsync = 0;
    repeat (4) @(negedge clk);
    for (int y = 0; y < h; y++) begin
      for (int x = 0; x < w; x++) begin
        logic [23:0] p;
        p = 24'($urandom) & 24'h7FFFFF;
        vid_active = 1; vid_rgb = p;
        @(negedge clk);
        checks += 2;
        if (!out_active) begin failures++; $display("active not delayed"); end
        if (out_rgb !== (edge_px(x, y) ? 24'hFF0000 : p)) begin
          failures++; $display("(%0d,%0d) got %h exp %h", x, y, out_rgb, edge_px(x, y) ? 24'hFF0000 : p);
        end
        if (edge_px(x, y)) red++;
      end
      vid_active = 0;
      vid_hsync = 1;
      repeat (2) @(negedge clk);
      checks++;
      if (!out_hsync) begin failures++; $display("hsync not delayed"); end
      vid_hsync = 0;
      repeat (3) @(negedge clk);
    end
  endtask

  initial begin
    logic [31:0] r;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3; i++) begin
      axil_write(8'(8 * i),     {4'd0, 12'(bx[i][1]), 4'd0, 12'(bx[i][0])});
      axil_write(8'(8 * i + 4), {ben[i], 3'd0, 12'(bx[i][3]), 4'd0, 12'(bx[i][2])});
    end
    for (int i = 0; i < 3; i++) begin
      axil_read(8'(8 * i + 4), r);
      checks++;
      if (r != {ben[i], 3'd0, 12'(bx[i][3]), 4'd0, 12'(bx[i][2])}) begin failures++; $display("readback box %0d: %h", i, r); end
    end
    frame(40, 30);
    frame(40, 30);
    checks++;
    if (red == 0) begin failures++; $display("no box drawn"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
