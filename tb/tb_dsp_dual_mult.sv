// tb_dsp_dual_mult: checks the packed dual multiplication against plain
// signed products, for all corner operands and 20000 random triples.
module tb_dsp_dual_mult;
  logic signed [7:0]  w0, w1, x;
  logic signed [15:0] p0, p1;
  int checks = 0, failures = 0;

  dsp_dual_mult dut (.w0, .w1, .x, .p0, .p1);

  task automatic check(input logic signed [7:0] a, b, c);
    int e0, e1;
    w0 = a; w1 = b; x = c;
    #1;
    e0 = int'(a) * int'(c);
    e1 = int'(b) * int'(c);
    checks += 2;
    if (int'(p0) != e0) begin failures++; $display("p0 %0d*%0d: got %0d exp %0d", a, c, p0, e0); end
    if (int'(p1) != e1) begin failures++; $display("p1 %0d*%0d: got %0d exp %0d", b, c, p1, e1); end
  endtask

  initial begin
    automatic logic signed [7:0] corner [6] = '{-128, -127, -1, 0, 1, 127};
    foreach (corner[i]) foreach (corner[j]) foreach (corner[k]) check(corner[i], corner[j], corner[k]);
    repeat (20000) check($urandom, $urandom, $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
