// tb_conv_top: streams output pixels made of 1..4 input-channel batches,
// back to back and with gaps; checks each accumulated result plus bias and
// that it appears exactly four clocks after the last batch.
module tb_conv_top;
  import yolo_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, first = 0, last = 0, out_valid;
  kword_t win [N_CH];
  kword_t wts [N_FILT][N_CH];
  acc_t bias [N_FILT], acc [N_FILT];
  int checks = 0, failures = 0;
  int cyc = 0;
  typedef struct { int v [N_FILT]; int due; } exp_t;
  exp_t expq [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  conv_top dut (.clk, .rst_n, .in_valid, .first, .last, .window(win), .weights(wts),
                .bias, .out_valid, .acc);

  function automatic int dot(kword_t a, kword_t b);
    int s = 0;
    for (int k = 0; k < 9; k++) s += int'($signed(a[8*k +: 8])) * int'($signed(b[8*k +: 8]));
    return s;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    if (expq.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = expq.pop_front();
      checks++;
      if (cyc != e.due) begin failures++; $display("latency: at %0d expected %0d", cyc, e.due); end
      for (int f = 0; f < N_FILT; f++) begin
        checks++;
        if (int'(acc[f]) != e.v[f]) begin failures++; $display("f%0d got %0d exp %0d", f, acc[f], e.v[f]); end
      end
    end
  end

  initial begin
    for (int f = 0; f < N_FILT; f++) bias[f] = $urandom_range(0, 200000) - 100000;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 200; p++) begin
      exp_t e;
      int nb;
      nb = $urandom_range(1, 4);
      foreach (e.v[f]) e.v[f] = int'(bias[f]);
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        for (int c = 0; c < N_CH; c++) begin
          for (int k = 0; k < 9; k++) win[c][8*k +: 8] = 8'($urandom);
          for (int f = 0; f < N_FILT; f++)
            for (int k = 0; k < 9; k++) wts[f][c][8*k +: 8] = 8'($urandom);
        end
        for (int f = 0; f < N_FILT; f++)
          for (int c = 0; c < N_CH; c++) e.v[f] += dot(win[c], wts[f][c]);
        in_valid = 1; first = (b == 0); last = (b == nb - 1);
        // registered on the 4th rising edge, sampled by the checker on the 5th
        if (last) begin e.due = cyc + 5; expq.push_back(e); end
        if ($urandom_range(0, 3) == 0) begin @(negedge clk); in_valid = 0; end
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
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
