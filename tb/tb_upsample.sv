// tb_upsample: random frames (up to 13x13) with random input gaps and output
// back-pressure; every output beat is compared with the pixel at
// (y/2, x/2) of the input, TLAST with the last beat, and the beat count with
// 4*W*H.
module tb_upsample;
  logic clk = 0, rst_n = 0, start = 0;
  logic [11:0] cfg_w = 0, cfg_h = 0;
  logic [63:0] s_tdata = 0, m_tdata;
  logic s_tvalid = 0, s_tready, m_tvalid, m_tlast, m_tready = 0;
  logic [63:0] img [13][13];
  int checks = 0, failures = 0;
  int ox = 0, oy = 0, outs = 0, cur_w = 1, cur_h = 1;

  always #5 clk = ~clk;
  upsample #(.MAX_W(13)) dut (.clk, .rst_n, .start, .cfg_w, .cfg_h, .s_tdata, .s_tvalid, .s_tready,
                              .m_tdata, .m_tvalid, .m_tlast, .m_tready);

  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    checks += 2;
    if (m_tdata !== img[oy / 2][ox / 2]) begin failures++; $display("(%0d,%0d) got %h exp %h", oy, ox, m_tdata, img[oy/2][ox/2]); end
    if (m_tlast != (oy == 2 * cur_h - 1 && ox == 2 * cur_w - 1)) begin failures++; $display("tlast at (%0d,%0d)", oy, ox); end
    outs++;
    if (ox == 2 * cur_w - 1) begin ox = 0; oy++; end else ox++;
  end

  always @(negedge clk) m_tready = ($urandom_range(0, 3) != 0);

  task automatic run(int w, int h);
    @(negedge clk);
    cur_w = w; cur_h = h; ox = 0; oy = 0; outs = 0;
    cfg_w = 12'(w); cfg_h = 12'(h); start = 1;
    @(negedge clk) start = 0;
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        img[y][x] = {$urandom, $urandom};
        s_tdata = img[y][x];
        s_tvalid = 1;
        do @(posedge clk); while (!s_tready);
        @(negedge clk) s_tvalid = 0;
        if ($urandom_range(0, 3) == 0) @(negedge clk);
      end
    while (outs < 4 * w * h) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (outs != 4 * w * h) begin failures++; $display("%0d beats, expected %0d", outs, 4 * w * h); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(3, 2);
    run(13, 13);
    run(1, 1);
    run(5, 4);
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
