// conv_1x2: one input channel against two filters, 3x3 taps.
//
// Nine dual-multiply DSPs (positions 00..22 of the 3x3 kernel) each multiply
// one activation of the window by the same tap of two kernels. The nine
// products of each filter are summed into a 20-bit dot product.
// Interface: data_in, weight0 and weight1 are 72-bit 3x3 words with tap
// k = 3*row + col at bits [8k+7:8k]. Timing: products are registered (the DSP
// M/P register), the sums are registered once more, so sum0/sum1 appear two
// clocks after the inputs. The 9-DSP structure and port names follow the
// paper's DSP array figure; the pipeline depth is this design's choice.
module conv_1x2
  import yolo_pkg::*;
(
  input  logic                clk,
  input  kword_t              data_in,
  input  kword_t              weight0,
  input  kword_t              weight1,
  output logic signed [19:0]  sum0,
  output logic signed [19:0]  sum1
);
  logic signed [15:0] p0 [TAPS];
  logic signed [15:0] p1 [TAPS];
  logic signed [15:0] p0_q [TAPS];
  logic signed [15:0] p1_q [TAPS];

  for (genvar k = 0; k < TAPS; k++) begin : g_dsp
    dsp_dual_mult u_dsp (
      .w0 (weight0[8*k +: 8]),
      .w1 (weight1[8*k +: 8]),
      .x  (data_in[8*k +: 8]),
      .p0 (p0[k]),
      .p1 (p1[k])
    );
  end

  always_ff @(posedge clk) begin
    p0_q <= p0;
    p1_q <= p1;
  end

  always_ff @(posedge clk) begin
    logic signed [19:0] s0, s1;
    s0 = '0;
    s1 = '0;
    for (int k = 0; k < TAPS; k++) begin
      s0 += 20'(p0_q[k]);
      s1 += 20'(p1_q[k]);
    end
    sum0 <= s0;
    sum1 <= s1;
  end
endmodule
