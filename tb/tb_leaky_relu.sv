// tb_leaky_relu: fills the 256-entry table with a LeakyReLU of slope 0.1 on
// a symmetric int8 scale (out = q for q > 0, round(0.1*q) otherwise), then
// looks up every input value in all lanes, and checks the bypass.
module tb_leaky_relu;
  import yolo_pkg::*;
  logic clk = 0, rst_n = 0;
  logic wr_start = 0, wr_valid = 0, enable = 0, in_valid = 0, out_valid;
  logic [63:0] wr_data = 0;
  q8_t d [N_FILT], q [N_FILT];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  leaky_relu dut (.clk, .rst_n, .wr_start, .wr_valid, .wr_data, .enable, .in_valid, .d,
                  .out_valid, .q);

  function automatic int leaky(int v);
    if (v > 0) return v;
    return (v * 10 - 50) / 100;   // round(0.1*v) for v <= 0
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk) wr_start = 1;
    @(negedge clk) wr_start = 0;
    for (int i = 0; i < 32; i++) begin
      for (int j = 0; j < 8; j++) wr_data[8*j +: 8] = 8'(leaky(int'($signed(8'(8*i + j)))));
      wr_valid = 1;
      @(negedge clk) wr_valid = 0;
    end
    enable = 1;
    for (int v = -128; v < 128; v += 1) begin
      for (int l = 0; l < N_FILT; l++) d[l] = 8'((v + 37 * l) % 256);
      in_valid = 1;
      @(negedge clk) in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("no out_valid"); end
      for (int l = 0; l < N_FILT; l++) begin
        checks++;
        if (int'(q[l]) != leaky(int'(d[l]))) begin
          failures++; $display("in %0d got %0d exp %0d", d[l], q[l], leaky(int'(d[l])));
        end
      end
    end
    enable = 0;
    for (int v = -128; v < 128; v += 17) begin
      for (int l = 0; l < N_FILT; l++) d[l] = 8'(v + l);
      in_valid = 1;
      @(negedge clk) in_valid = 0;
      for (int l = 0; l < N_FILT; l++) begin
        checks++;
        if (q[l] != d[l]) begin failures++; $display("bypass got %0d exp %0d", q[l], d[l]); end
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
