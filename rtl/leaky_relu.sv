// leaky_relu: LeakyReLU by table lookup.
//
// The int8 input (its two's-complement byte used as an unsigned address)
// selects one of 256 precomputed int8 outputs. The host fills the table with
// quant(LeakyReLU(dequant(q))) for every q, so dequantise, compare, multiply
// by the slope and requantise all collapse into one read. Loading: each
// 64-bit beat writes 8 consecutive entries (entry 8*i+j from byte j of beat
// i). Eight lanes are looked up in parallel; with enable low the data pass
// unchanged. Output registered: one clock latency.
// The 256-entry table replacing the floating-point activation follows the
// paper; the load format and the bypass are this design's choices.
module leaky_relu
  import yolo_pkg::*;
#(
  parameter int unsigned LANES   = N_FILT,
  parameter int unsigned ENTRIES = 256
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wr_start,
  input  logic               wr_valid,
  input  logic [AXIS_W-1:0]  wr_data,
  input  logic               enable,
  input  logic               in_valid,
  input  q8_t                d [LANES],
  output logic               out_valid,
  output q8_t                q [LANES]
);
  localparam int unsigned BEATS = ENTRIES / 8;

  q8_t lut [ENTRIES];
  logic [$clog2(BEATS)-1:0] wr_beat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        wr_beat <= '0;
    else if (wr_start) wr_beat <= '0;
    else if (wr_valid) wr_beat <= wr_beat + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (wr_valid)
      for (int j = 0; j < 8; j++) lut[{wr_beat, 3'(j)}] <= wr_data[8*j +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int l = 0; l < LANES; l++) q[l] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int l = 0; l < LANES; l++) q[l] <= enable ? lut[8'(d[l])] : d[l];
    end
  end
endmodule
