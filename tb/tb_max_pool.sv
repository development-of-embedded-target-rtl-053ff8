// tb_max_pool: random 8-channel frames through all three modes (stride 2,
// stride 1, bypass), with idle gaps; every output is compared in order with
// a reference maximum over the 2x2 window, and the output count is checked.
module tb_max_pool;
  import yolo_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, in_valid = 0, out_valid;
  pool_mode_e mode = POOL_NONE;
  logic [11:0] cfg_w = 0;
  q8_t d [N_FILT], q [N_FILT];
  int checks = 0, failures = 0;
  typedef logic [8*N_FILT-1:0] pix_t;   // lane l in byte l
  pix_t expq [$];
  q8_t frame [10][10][N_FILT];

  always #5 clk = ~clk;
  max_pool #(.MAX_W(16)) dut (.clk, .rst_n, .start, .mode, .cfg_w, .in_valid, .d, .out_valid, .q);

  always @(posedge clk) if (rst_n && out_valid) begin
    pix_t e;
    if (expq.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = expq.pop_front();
      for (int l = 0; l < N_FILT; l++) begin
        checks++;
        if (q[l] != q8_t'(e[8*l +: 8])) begin failures++; $display("lane %0d got %0d exp %0d", l, q[l], $signed(e[8*l +: 8])); end
      end
    end
  end

  task automatic run(pool_mode_e m, int w, int h);
    @(negedge clk);
    mode = m; cfg_w = 12'(w); start = 1;
    @(negedge clk) start = 0;
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        pix_t e;
        bit emit;
        for (int l = 0; l < N_FILT; l++) frame[y][x][l] = 8'($urandom);
        emit = (m == POOL_NONE) || (m == POOL_S2 && y % 2 == 1 && x % 2 == 1) ||
               (m == POOL_S1 && y >= 1 && x >= 1);
        if (emit) begin
          for (int l = 0; l < N_FILT; l++) begin
            q8_t mx;
            mx = frame[y][x][l];
            if (m != POOL_NONE) begin
              if (frame[y][x-1][l]   > mx) mx = frame[y][x-1][l];
              if (frame[y-1][x][l]   > mx) mx = frame[y-1][x][l];
              if (frame[y-1][x-1][l] > mx) mx = frame[y-1][x-1][l];
            end
            e[8*l +: 8] = mx;
          end
          expq.push_back(e);
        end
        d = frame[y][x];
        in_valid = 1;
        @(negedge clk) in_valid = 0;
        if ($urandom_range(0, 4) == 0) @(negedge clk);
      end
    repeat (3) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d outputs missing", expq.size()); expq.delete(); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(POOL_S2, 8, 6);
    run(POOL_S1, 7, 5);
    run(POOL_NONE, 5, 3);
    run(POOL_S2, 10, 10);
    run(POOL_S1, 10, 9);
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
