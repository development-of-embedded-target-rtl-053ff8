// stream_rx: AXI4-Stream slave for everything the host sends.
//
// The load mode written in main_ctrl decides where each 64-bit beat goes:
// weight_buffer, bias_buffer, the activation table, or (feature mode) the
// feature line buffer that starts the layer pipeline. In the three parameter
// modes every beat is taken at once. In feature mode s_tready is held low
// while tx_free is not above CREDIT, the most results the pipeline can still
// produce from beats already taken; this turns back-pressure on the result
// stream into a stall of the input stream. In idle mode nothing is accepted.
// The paper names the block and its AXI4-Stream port; the modes and the
// credit rule are this design's.
module stream_rx
  import yolo_pkg::*;
#(
  parameter int unsigned DATA_W = AXIS_W,
  parameter int unsigned CREDIT = 16,
  parameter int unsigned FREE_W = 10
) (
  input  rx_mode_e           mode,
  input  logic [FREE_W-1:0]  tx_free,
  // AXI4-Stream slave
  input  logic [DATA_W-1:0]  s_tdata,
  input  logic               s_tvalid,
  input  logic               s_tlast,
  output logic               s_tready,
  // routed beats
  output logic [DATA_W-1:0]  beat_data,
  output logic               weight_we,
  output logic               bias_we,
  output logic               lut_we,
  output logic               feature_we,
  output logic               stall        // feature beat offered but held off
);
  logic take;

  always_comb begin
    unique case (mode)
      RX_WEIGHT, RX_BIAS, RX_LUT: s_tready = 1'b1;
      RX_FEATURE:                 s_tready = (tx_free > FREE_W'(CREDIT));
      default:                    s_tready = 1'b0;
    endcase
    take       = s_tvalid && s_tready;
    beat_data  = s_tdata;
    weight_we  = take && (mode == RX_WEIGHT);
    bias_we    = take && (mode == RX_BIAS);
    lut_we     = take && (mode == RX_LUT);
    feature_we = take && (mode == RX_FEATURE);
    stall      = s_tvalid && !s_tready && (mode == RX_FEATURE);
  end

  // s_tlast carries no meaning here: pass lengths come from the registers.
  logic unused_tlast;
  assign unused_tlast = s_tlast;
endmodule
