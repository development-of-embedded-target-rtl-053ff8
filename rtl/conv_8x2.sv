// conv_8x2: eight input channels against two filters.
//
// Eight conv_1x2 units (one per input channel of a batch) share the two
// filters; their 20-bit sums are added into one 24-bit partial sum per filter.
// Timing: three clocks from inputs to sum0/sum1 (two inside conv_1x2, one for
// the channel adder tree). Structure after the paper's DSP array figure
// (conv_1x2_inst0..inst7 inside conv_8x2); adder tree depth is this design's.
module conv_8x2
  import yolo_pkg::*;
(
  input  logic               clk,
  input  kword_t             data_in [N_CH],   // window of each channel
  input  kword_t             weight0 [N_CH],   // filter-0 kernel per channel
  input  kword_t             weight1 [N_CH],   // filter-1 kernel per channel
  output logic signed [23:0] sum0,
  output logic signed [23:0] sum1
);
  logic signed [19:0] s0 [N_CH];
  logic signed [19:0] s1 [N_CH];

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    conv_1x2 u_conv_1x2 (
      .clk     (clk),
      .data_in (data_in[c]),
      .weight0 (weight0[c]),
      .weight1 (weight1[c]),
      .sum0    (s0[c]),
      .sum1    (s1[c])
    );
  end

  always_ff @(posedge clk) begin
    logic signed [23:0] a0, a1;
    a0 = '0;
    a1 = '0;
    for (int c = 0; c < N_CH; c++) begin
      a0 += 24'(s0[c]);
      a1 += 24'(s1[c]);
    end
    sum0 <= a0;
    sum1 <= a1;
  end
endmodule
