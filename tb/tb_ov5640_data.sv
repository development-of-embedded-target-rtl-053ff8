// tb_ov5640_data: a camera model sends frames of RGB565 pixels (two bytes
// each, high byte first) framed by VSYNC and HREF with blanking; every
// captured pixel is checked against the RGB888 expansion of what was sent,
// together with the start-of-frame and end-of-line marks and the count.
module tb_ov5640_data;
  logic cam_pclk = 0, rst_n = 0;
  logic cam_vsync = 0, cam_href = 0;
  logic [7:0] cam_data = 0;
  logic pix_valid, pix_sof, pix_eol;
  logic [23:0] pix_rgb;
  int checks = 0, failures = 0;
  typedef struct { logic [23:0] rgb; bit sof, eol; } px_t;
  px_t expq [$];

  always #5 cam_pclk = ~cam_pclk;
  ov5640_data dut (.cam_pclk, .rst_n, .cam_vsync, .cam_href, .cam_data, .pix_valid, .pix_rgb, .pix_sof, .pix_eol);

  always @(posedge cam_pclk) if (rst_n && pix_valid) begin
    px_t e;
    if (expq.size() == 0) begin failures++; $display("unexpected pixel"); end
    else begin
      e = expq.pop_front();
      checks++;
      if (pix_rgb !== e.rgb || pix_sof != e.sof || pix_eol != e.eol) begin
        failures++;
        $display("got %h sof %b eol %b exp %h %b %b", pix_rgb, pix_sof, pix_eol, e.rgb, e.sof, e.eol);
      end
    end
  end

  task automatic frame(int w, int h);
    @(negedge cam_pclk) cam_vsync = 1;
    repeat (4) @(negedge cam_pclk);
    cam_vsync = 0;
    repeat (6) @(negedge cam_pclk);
    for (int y = 0; y < h; y++) begin
      for (int x = 0; x < w; x++) begin
        logic [15:0] p;
        px_t e;
        p = 16'($urandom);
        e.rgb = {p[15:11], p[15:13], p[10:5], p[10:9], p[4:0], p[4:2]};
        e.sof = (x == 0 && y == 0);
        e.eol = (x == w - 1);
        expq.push_back(e);
        cam_href = 1; cam_data = p[15:8];
        @(negedge cam_pclk) cam_data = p[7:0];
        @(negedge cam_pclk);
      end
      cam_href = 0; cam_data = 8'hxx;
      repeat ($urandom_range(3, 8)) @(negedge cam_pclk);
    end
    repeat (5) @(negedge cam_pclk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d pixels missing", expq.size()); expq.delete(); end
  endtask

  initial begin
    repeat (2) @(negedge cam_pclk);
    rst_n = 1;
    frame(8, 4);
    frame(17, 6);
    frame(1, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge cam_pclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
