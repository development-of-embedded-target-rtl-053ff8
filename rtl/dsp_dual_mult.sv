// dsp_dual_mult: two int8 x int8 products from one multiplier.
//
// A DSP48E1 slice is used with its pre-adder, P = (A + D) * B. The weight of
// the first filter is placed in the upper part of the 25-bit A port (sign
// extended to 9 bits and shifted left by 16), the weight of the second
// filter is sign extended over the whole 25-bit D port, and the shared
// activation is sign extended into the 18-bit B port. The 43-bit product then
// holds w1*x in P[15:0] and w0*x in P[31:16]; because the lower product is
// signed, its sign borrows one from the upper field, so P[15] is added back.
// The field layout (9/16 bits in A, 17/8 in D, 10/8 in B, 11/16/16 in P)
// follows the paper's DSP mapping figure; the borrow correction is implied
// by that packing. Purely combinational: the registers of the DSP slice sit
// in the caller's pipeline.
module dsp_dual_mult (
  input  logic signed [7:0]  w0,   // filter 0 weight (A port)
  input  logic signed [7:0]  w1,   // filter 1 weight (D port)
  input  logic signed [7:0]  x,    // activation (B port)
  output logic signed [15:0] p0,   // w0 * x
  output logic signed [15:0] p1    // w1 * x
);
  logic signed [24:0] a_port, d_port;
  logic signed [17:0] b_port;
  logic signed [42:0] p_port;

  always_comb begin
    a_port = {{1{w0[7]}}, w0, 16'h0000};
    d_port = {{17{w1[7]}}, w1};
    b_port = {{10{x[7]}}, x};
    p_port = (43'(a_port) + 43'(d_port)) * 43'(b_port);
    p1     = p_port[15:0];
    p0     = p_port[31:16] + {15'd0, p_port[15]};
  end
endmodule
