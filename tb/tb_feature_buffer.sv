// tb_feature_buffer: streams random frames (several widths, heights and
// batch counts, with idle gaps) and checks every emitted 3x3 window, its
// batch index and first/last flags against windows cut from the stored
// frame, and that exactly (H-2)*(W-2)*nb windows appear.
module tb_feature_buffer;
  import yolo_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0, in_valid = 0;
  logic [11:0] cfg_w = 0;
  logic [8:0]  cfg_nb = 0;
  logic [63:0] in_data = 0;
  logic win_valid, win_first, win_last;
  logic [7:0] win_batch;
  kword_t window [N_CH];
  int checks = 0, failures = 0;

  typedef struct { kword_t w [N_CH]; int b; bit f, l; } win_t;
  win_t expq [$];
  logic [63:0] frame [12][12][4];

  always #5 clk = ~clk;
  feature_buffer #(.LINE_DEPTH(64), .MAX_NB(4)) dut (
    .clk, .rst_n, .start, .cfg_w, .cfg_nb, .in_valid, .in_data,
    .win_valid, .win_first, .win_last, .win_batch, .window);

  always @(posedge clk) if (rst_n && win_valid) begin
    win_t e;
    if (expq.size() == 0) begin failures++; $display("unexpected window"); end
    else begin
      e = expq.pop_front();
      checks++;
      if (int'(win_batch) != e.b || win_first != e.f || win_last != e.l) begin
        failures++; $display("batch/flags got %0d %b %b exp %0d %b %b", win_batch, win_first, win_last, e.b, e.f, e.l);
      end
      for (int c = 0; c < N_CH; c++) begin
        checks++;
        if (window[c] !== e.w[c]) begin failures++; $display("window c%0d got %h exp %h", c, window[c], e.w[c]); end
      end
    end
  end

  task automatic run_frame(int w, int h, int nb, bit gaps);
    @(negedge clk);
    cfg_w = 12'(w); cfg_nb = 9'(nb); start = 1;
    @(negedge clk) start = 0;
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++)
        for (int b = 0; b < nb; b++) begin
          frame[y][x][b] = {$urandom, $urandom};
          if (y >= 2 && x >= 2) begin
            win_t e;
            e.b = b; e.f = (b == 0); e.l = (b == nb - 1);
            for (int c = 0; c < N_CH; c++)
              for (int r = 0; r < 3; r++)
                for (int q = 0; q < 3; q++)
                  e.w[c][8*(3*r+q) +: 8] = frame[y-2+r][x-2+q][b][8*c +: 8];
            expq.push_back(e);
          end
          in_data = frame[y][x][b];
          in_valid = 1;
          @(negedge clk);
          in_valid = 0;
          if (gaps && $urandom_range(0, 3) == 0) @(negedge clk);
        end
    repeat (4) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d windows missing", expq.size()); expq.delete(); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_frame(5, 4, 1, 0);
    run_frame(6, 5, 3, 1);
    run_frame(12, 7, 4, 0);
    run_frame(3, 3, 2, 1);
    run_frame(7, 6, 1, 1);
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
