// tb_img_resize: random frames with idle gaps through a scaler with small
// sizes (13x9 to 5x4) and through one with equal sizes (7x5 to 7x5); every
// output pixel is checked against input pixel
// (ceil((ox+1)*IN_W/OUT_W)-1, ceil((oy+1)*IN_H/OUT_H)-1), with its sof/eol
// marks and the pixel count per frame.
module tb_img_resize;
  logic clk = 0, rst_n = 0;
  logic pix_valid = 0, pix_sof = 0, pix_eol = 0;
  logic [23:0] pix_rgb = 0;
  logic ov [2], os [2], oe [2];
  logic [23:0] orgb [2];
  int checks = 0, failures = 0;
  logic [23:0] img [16][16];
  int cnt [2];
  int active = 0;   // which scaler the current frame is sized for
  localparam int IW [2] = '{13, 7};
  localparam int IH [2] = '{9, 5};
  localparam int OW [2] = '{5, 7};
  localparam int OH [2] = '{4, 5};

  always #5 clk = ~clk;
  img_resize #(.IN_W(13), .IN_H(9), .OUT_W(5), .OUT_H(4)) dut0 (
    .clk, .rst_n, .pix_valid, .pix_rgb, .pix_sof, .pix_eol,
    .out_valid(ov[0]), .out_rgb(orgb[0]), .out_sof(os[0]), .out_eol(oe[0]));
  img_resize #(.IN_W(7), .IN_H(5), .OUT_W(7), .OUT_H(5)) dut1 (
    .clk, .rst_n, .pix_valid, .pix_rgb, .pix_sof, .pix_eol,
    .out_valid(ov[1]), .out_rgb(orgb[1]), .out_sof(os[1]), .out_eol(oe[1]));

  for (genvar d = 0; d < 2; d++) begin : g_chk
    always @(posedge clk) if (rst_n && ov[d] && active == d) begin
      int ox, oy, sx, sy;
      ox = cnt[d] % OW[d]; oy = cnt[d] / OW[d];
      sx = ((ox + 1) * IW[d] + OW[d] - 1) / OW[d] - 1;
      sy = ((oy + 1) * IH[d] + OH[d] - 1) / OH[d] - 1;
      checks++;
      if (orgb[d] !== img[sy][sx] || os[d] != (cnt[d] == 0) || oe[d] != (ox == OW[d] - 1)) begin
        failures++;
        $display("dut%0d out(%0d,%0d) got %h sof %b eol %b exp %h", d, ox, oy, orgb[d], os[d], oe[d], img[sy][sx]);
      end
      cnt[d]++;
    end
  end

  task automatic frame(int d);
    cnt[0] = 0; cnt[1] = 0; active = d;
    for (int y = 0; y < IH[d]; y++)
      for (int x = 0; x < IW[d]; x++) begin
        @(negedge clk);
        img[y][x] = 24'($urandom);
        pix_rgb = img[y][x]; pix_valid = 1;
        pix_sof = (x == 0 && y == 0); pix_eol = (x == IW[d] - 1);
        @(negedge clk) pix_valid = 0;
        if ($urandom_range(0, 2) == 0) @(negedge clk);
      end
    repeat (3) @(negedge clk);
    checks++;
    if (cnt[d] != OW[d] * OH[d]) begin failures++; $display("dut%0d gave %0d pixels", d, cnt[d]); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    frame(0); frame(0);
    frame(1);
    frame(0);
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
