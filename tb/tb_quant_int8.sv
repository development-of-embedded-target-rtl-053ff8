// tb_quant_int8: random accumulators, multipliers, shifts and zero points
// (plus saturation corners) against a 64-bit reference of
// sat8(floor((acc*M1 + 2^(n+14)) / 2^(n+15)) + Z3); checks one-clock latency.
module tb_quant_int8;
  import yolo_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  acc_t acc [N_FILT];
  logic [15:0] m1;
  logic [4:0] shift_n;
  logic signed [7:0] z3;
  q8_t q [N_FILT];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  quant_int8 dut (.clk, .rst_n, .in_valid, .acc, .m1, .shift_n, .z3, .out_valid, .q);

  function automatic int ref_q(int a, int m, int n, int z);
    longint p, r;
    p = longint'(a) * longint'(m);
    r = (p + (64'sd1 <<< (n + 14))) >>> (n + 15);
    r = r + z;
    if (r > 127) return 127;
    if (r < -128) return -128;
    return int'(r);
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int e [N_FILT];
      m1 = 16'($urandom);
      shift_n = 5'($urandom_range(0, 16));
      z3 = 8'($urandom_range(0, 40) - 20);
      for (int l = 0; l < N_FILT; l++) begin
        case (i % 4)
          0: acc[l] = $urandom;                          // saturating
          default: acc[l] = $signed($urandom_range(0, 1 << 18)) - (1 << 17);
        endcase
        e[l] = ref_q(int'(acc[l]), int'(m1), int'(shift_n), int'(z3));
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing"); end
      for (int l = 0; l < N_FILT; l++) begin
        checks++;
        if (int'(q[l]) != e[l]) begin
          failures++;
          $display("acc %0d m1 %0d n %0d z %0d: got %0d exp %0d", acc[l], m1, shift_n, z3, q[l], e[l]);
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("out_valid stuck"); end
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
