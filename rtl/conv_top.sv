// conv_top: convolution computation module (8 filters x 8 input channels).
//
// Four conv_8x2 units each handle a pair of filters (2i, 2i+1), so one
// 8-channel 3x3 window is multiplied by eight kernels per clock using
// 4 x 8 x 9 = 288 dual-multiply DSPs. A layer with more than 8 input channels
// is fed as consecutive batches of 8 channels for the same output pixel:
// 'first' marks batch 0 (the accumulator is loaded), 'last' marks the final
// batch, where the fused (BN-folded) bias is added and the 32-bit result is
// presented on acc with out_valid for one clock.
// Timing: out_valid follows in_valid of the last batch by 4 clocks; a new
// window can be accepted every clock. The batch loop and bias in the final
// batch follow the paper; accumulator width and latency are this design's.
module conv_top
  import yolo_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  logic    first,
  input  logic    last,
  input  kword_t  window  [N_CH],          // activations, per channel
  input  kword_t  weights [N_FILT][N_CH],  // kernels, per filter and channel
  input  acc_t    bias    [N_FILT],
  output logic    out_valid,
  output acc_t    acc     [N_FILT]
);
  localparam int unsigned N_PAIR = N_FILT / 2;
  localparam int unsigned LAT    = 3;      // conv_8x2 latency

  logic signed [23:0] psum [N_FILT];
  logic [LAT-1:0] v_d, f_d, l_d;
  acc_t acc_r [N_FILT];

  for (genvar i = 0; i < N_PAIR; i++) begin : g_pair
    conv_8x2 u_conv_8x2 (
      .clk     (clk),
      .data_in (window),
      .weight0 (weights[2*i]),
      .weight1 (weights[2*i+1]),
      .sum0    (psum[2*i]),
      .sum1    (psum[2*i+1])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_d <= '0;
      f_d <= '0;
      l_d <= '0;
    end else begin
      v_d <= {v_d[LAT-2:0], in_valid};
      f_d <= {f_d[LAT-2:0], first};
      l_d <= {l_d[LAT-2:0], last};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int f = 0; f < N_FILT; f++) begin
        acc_r[f] <= '0;
        acc[f]   <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      if (v_d[LAT-1]) begin
        for (int f = 0; f < N_FILT; f++) begin
          acc_t base;
          base = f_d[LAT-1] ? acc_t'(0) : acc_r[f];
          acc_r[f] <= base + acc_t'(psum[f]);
          if (l_d[LAT-1]) acc[f] <= base + acc_t'(psum[f]) + bias[f];
        end
        out_valid <= l_d[LAT-1];
      end
    end
  end
endmodule
