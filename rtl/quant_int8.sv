// quant_int8: requantisation of the 32-bit accumulators to int8.
//
// With S1*S2/S3 = 2^-(n+15) * M1 (M1 a 16-bit integer), the int8 output is
//   q3 = sat8( round( acc * M1 / 2^(n+15) ) + Z3 )
// where acc already holds sum((q1)(q2)) + bias/(S1*S2). Rounding adds
// 2^(n+14) before the arithmetic shift (round half up); the result is
// saturated to [-128, 127]. Eight lanes, one result per lane per clock,
// registered: out_valid follows in_valid by one clock.
// The multiply-and-shift form follows the paper's equations; the rounding
// rule and saturation are this design's choices (the paper does not state
// them).
module quant_int8
  import yolo_pkg::*;
#(
  parameter int unsigned LANES = N_FILT
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  acc_t              acc [LANES],
  input  logic [15:0]       m1,
  input  logic [4:0]        shift_n,
  input  logic signed [7:0] z3,
  output logic              out_valid,
  output q8_t               q [LANES]
);
  function automatic q8_t requant(acc_t a, logic [15:0] m, logic [4:0] n, logic signed [7:0] z);
    logic signed [48:0] prod;
    logic signed [48:0] rnd;
    logic signed [48:0] sh;
    logic signed [48:0] r;
    logic [5:0]         s;
    s    = 6'(n) + 6'd15;
    prod = 49'(a) * $signed({1'b0, m});
    rnd  = 49'sd1 <<< (s - 6'd1);
    sh   = (prod + rnd) >>> s;
    r    = sh + 49'(z);
    if (r > 49'sd127)       return 8'sd127;
    else if (r < -49'sd128) return -8'sd128;
    else                    return q8_t'(r);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int l = 0; l < LANES; l++) q[l] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int l = 0; l < LANES; l++) q[l] <= requant(acc[l], m1, shift_n, z3);
    end
  end
endmodule
