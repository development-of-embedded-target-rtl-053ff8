// tb_conv_1x2: random 3x3 windows and kernel pairs; each result is compared,
// two clocks later, with a dot product computed in the testbench.
module tb_conv_1x2;
  import yolo_pkg::*;
  logic clk = 0;
  kword_t d, w0, w1;
  logic signed [19:0] s0, s1;
  int checks = 0, failures = 0;
  int e0 [$], e1 [$];

  always #5 clk = ~clk;
  conv_1x2 dut (.clk, .data_in(d), .weight0(w0), .weight1(w1), .sum0(s0), .sum1(s1));

  function automatic int dot(kword_t a, kword_t b);
    int s = 0;
    for (int k = 0; k < 9; k++) s += int'($signed(a[8*k +: 8])) * int'($signed(b[8*k +: 8]));
    return s;
  endfunction

  initial begin
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      for (int k = 0; k < 9; k++) begin
        d[8*k +: 8]  = (i < 4) ? 8'h80 : 8'($urandom);
        w0[8*k +: 8] = (i < 2) ? 8'h80 : 8'($urandom);
        w1[8*k +: 8] = (i < 2) ? 8'h7f : 8'($urandom);
      end
      e0.push_back(dot(d, w0));
      e1.push_back(dot(d, w1));
      if (i >= 2) begin
        int x0, x1;
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
