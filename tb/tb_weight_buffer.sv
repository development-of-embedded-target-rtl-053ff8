// tb_weight_buffer: loads kernels for several addresses (starting near the
// top so the address wraps), reads every address back and compares all 64
// kernels with the loaded bytes; also checks the one-clock read latency.
module tb_weight_buffer;
  import yolo_pkg::*;
  localparam int DEPTH = 256;
  localparam int NADDR = 5;
  logic clk = 0, rst_n = 0;
  logic wr_start = 0, wr_valid = 0;
  logic [7:0] wr_base = 8'd254, rd_addr = 0;
  logic [63:0] wr_data = 0;
  kword_t rd_data [N_FILT][N_CH];
  kword_t model [NADDR][N_FILT][N_CH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  weight_buffer #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .wr_start, .wr_base, .wr_valid, .wr_data,
                                      .rd_addr, .rd_data);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk) wr_start = 1;
    @(negedge clk) wr_start = 0;
    for (int a = 0; a < NADDR; a++)
      for (int c = 0; c < N_CH; c++)
        for (int k = 0; k < TAPS; k++) begin
          for (int f = 0; f < N_FILT; f++) begin
            model[a][f][c][8*k +: 8] = 8'($urandom);
            wr_data[8*f +: 8] = model[a][f][c][8*k +: 8];
          end
          wr_valid = ($urandom_range(0, 4) != 0);
          while (!wr_valid) begin
            @(negedge clk);
            wr_valid = ($urandom_range(0, 1) != 0);
          end
          @(negedge clk) wr_valid = 0;
        end
    for (int a = 0; a < NADDR; a++) begin
      rd_addr = 8'(254 + a);
      @(negedge clk);
      for (int f = 0; f < N_FILT; f++)
        for (int c = 0; c < N_CH; c++) begin
          checks++;
          if (rd_data[f][c] !== model[a][f][c]) begin
            failures++;
            $display("addr %0d f%0d c%0d got %h exp %h", rd_addr, f, c, rd_data[f][c], model[a][f][c]);
          end
        end
    end
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
