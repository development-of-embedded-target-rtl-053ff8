// tb_conv_8x2: random windows of eight channels against two filters; the
// two sums are compared, three clocks later, with reference dot products.
module tb_conv_8x2;
  import yolo_pkg::*;
  logic clk = 0;
  kword_t d [N_CH], w0 [N_CH], w1 [N_CH];
  logic signed [23:0] s0, s1;
  int checks = 0, failures = 0;
  int e0 [$], e1 [$];

  always #5 clk = ~clk;
  conv_8x2 dut (.clk, .data_in(d), .weight0(w0), .weight1(w1), .sum0(s0), .sum1(s1));

  function automatic int dot(kword_t a, kword_t b);
    int s = 0;
    for (int k = 0; k < 9; k++) s += int'($signed(a[8*k +: 8])) * int'($signed(b[8*k +: 8]));
    return s;
  endfunction

  initial begin
    for (int i = 0; i < 1000; i++) begin
      int x0, x1;
      @(negedge clk);
      x0 = 0; x1 = 0;
      for (int c = 0; c < N_CH; c++) begin
        for (int k = 0; k < 9; k++) begin
          d[c][8*k +: 8]  = (i < 3) ? 8'h80 : 8'($urandom);
          w0[c][8*k +: 8] = (i < 3) ? 8'h80 : 8'($urandom);
          w1[c][8*k +: 8] = (i < 3) ? 8'h7f : 8'($urandom);
        end
        x0 += dot(d[c], w0[c]);
        x1 += dot(d[c], w1[c]);
      end
      e0.push_back(x0);
      e1.push_back(x1);
      if (i >= 3) begin
        x0 = e0.pop_front(); x1 = e1.pop_front();
        checks += 2;
        if (int'(s0) != x0) begin failures++; $display("sum0 got %0d exp %0d", s0, x0); end
        if (int'(s1) != x1) begin failures++; $display("sum1 got %0d exp %0d", s1, x1); end
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
