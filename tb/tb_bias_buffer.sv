// tb_bias_buffer: loads 24 biases (three groups of 8, two per beat), then
// reads every group and checks all eight lanes.
module tb_bias_buffer;
  import yolo_pkg::*;
  logic clk = 0, rst_n = 0;
  logic wr_start = 0, wr_valid = 0;
  logic [63:0] wr_data = 0;
  logic [6:0] rd_group = 0;
  acc_t rd_bias [N_FILT];
  int model [24];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  bias_buffer dut (.clk, .rst_n, .wr_start, .wr_valid, .wr_data, .rd_group, .rd_bias);

  initial begin
    foreach (model[i]) model[i] = int'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk) wr_start = 1;
    @(negedge clk) wr_start = 0;
    for (int i = 0; i < 12; i++) begin
      wr_data = {32'(model[2*i+1]), 32'(model[2*i])};
      wr_valid = 1;
      @(negedge clk) wr_valid = 0;
      if (i % 3 == 0) @(negedge clk);
    end
    for (int g = 0; g < 3; g++) begin
      rd_group = 7'(g);
      @(negedge clk);
      for (int l = 0; l < N_FILT; l++) begin
        checks++;
        if (int'(rd_bias[l]) != model[8*g + l]) begin
          failures++;
          $display("group %0d lane %0d got %0d exp %0d", g, l, rd_bias[l], model[8*g + l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
