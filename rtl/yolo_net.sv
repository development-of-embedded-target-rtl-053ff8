// yolo_net: YOLOv3-Tiny convolution accelerator core.
//
// One pass computes eight output channels of a convolution layer: the host
// loads kernels (weight_buffer), fused biases (bias_buffer) and the LeakyReLU
// table through the receive stream, then streams the padded input map pixel
// by pixel, eight input channels per beat and all channel batches of a pixel
// back to back. feature_buffer forms 3x3 windows, conv_top multiplies them by
// eight kernels per clock and accumulates the batches, quant_int8 rescales
// to int8, leaky_relu applies the table, max_pool optionally pools, and the
// eight channels of each result pixel leave as one 64-bit beat through
// tx_buffer and stream_tx. Layers with more output channels are run as more
// passes; 1x1 layers use kernels with only the centre tap set. The upsample
// layer has its own stream pair and runs independently.
// Interfaces: AXI4-Lite slave (registers, see main_ctrl), AXI4-Stream slave
// s_axis (all loads and feature data), AXI4-Stream master m_axis (results),
// AXI4-Stream pair us_s_axis / us_m_axis (upsample). Throughput: one input
// beat per clock while the output side keeps up; pipeline latency from a
// last-batch beat to its result in tx_buffer is 9 clocks.
// The set of blocks and how they connect follow the paper's accelerator block
// diagram; the order of the loads, the register map and the host-side padding
// are this design's choices.
module yolo_net
  import yolo_pkg::*;
#(
  parameter int unsigned WDEPTH     = 256,
  parameter int unsigned BDEPTH     = 128,
  parameter int unsigned LINE_DEPTH = 2048,
  parameter int unsigned MAX_NB     = 256,
  parameter int unsigned POOL_MAX_W = 416,
  parameter int unsigned TX_DEPTH   = 512,
  parameter int unsigned UP_MAX_W   = 13
) (
  input  logic               clk,
  input  logic               rst_n,
  // AXI4-Lite control
  input  logic [7:0]         s_axil_awaddr,
  input  logic               s_axil_awvalid,
  output logic               s_axil_awready,
  input  logic [31:0]        s_axil_wdata,
  input  logic [3:0]         s_axil_wstrb,
  input  logic               s_axil_wvalid,
  output logic               s_axil_wready,
  output logic [1:0]         s_axil_bresp,
  output logic               s_axil_bvalid,
  input  logic               s_axil_bready,
  input  logic [7:0]         s_axil_araddr,
  input  logic               s_axil_arvalid,
  output logic               s_axil_arready,
  output logic [31:0]        s_axil_rdata,
  output logic [1:0]         s_axil_rresp,
  output logic               s_axil_rvalid,
  input  logic               s_axil_rready,
  // AXI4-Stream in (from DMA)
  input  logic [AXIS_W-1:0]  s_axis_tdata,
  input  logic               s_axis_tvalid,
  input  logic               s_axis_tlast,
  output logic               s_axis_tready,
  // AXI4-Stream out (to DMA)
  output logic [AXIS_W-1:0]  m_axis_tdata,
  output logic               m_axis_tvalid,
  output logic               m_axis_tlast,
  input  logic               m_axis_tready,
  // upsample stream pair
  input  logic [AXIS_W-1:0]  us_s_axis_tdata,
  input  logic               us_s_axis_tvalid,
  output logic               us_s_axis_tready,
  output logic [AXIS_W-1:0]  us_m_axis_tdata,
  output logic               us_m_axis_tvalid,
  output logic               us_m_axis_tlast,
  input  logic               us_m_axis_tready,
  // status
  output logic               busy,
  output logic               rx_stall      // feature beat held off by the output side
);
  localparam int unsigned FREE_W = $clog2(TX_DEPTH) + 1;

  logic        start;
  rx_mode_e    mode;
  layer_cfg_t  cfg;
  logic [23:0] out_beats;
  logic [11:0] up_w, up_h;
  logic        tx_done;

  main_ctrl u_main_ctrl (
    .clk, .rst_n,
    .s_awaddr (s_axil_awaddr), .s_awvalid (s_axil_awvalid), .s_awready (s_axil_awready),
    .s_wdata  (s_axil_wdata),  .s_wstrb   (s_axil_wstrb),   .s_wvalid  (s_axil_wvalid),
    .s_wready (s_axil_wready), .s_bresp   (s_axil_bresp),   .s_bvalid  (s_axil_bvalid),
    .s_bready (s_axil_bready), .s_araddr  (s_axil_araddr),  .s_arvalid (s_axil_arvalid),
    .s_arready(s_axil_arready),.s_rdata   (s_axil_rdata),   .s_rresp   (s_axil_rresp),
    .s_rvalid (s_axil_rvalid), .s_rready  (s_axil_rready),
    .start, .mode, .cfg, .out_beats, .up_w, .up_h, .tx_done, .busy
  );

  // ---------------- receive side ----------------
  logic [FREE_W-1:0] tx_free;
  logic [AXIS_W-1:0] beat;
  logic weight_we, bias_we, lut_we, feature_we;

  stream_rx #(.FREE_W(FREE_W)) u_stream_rx (
    .mode, .tx_free,
    .s_tdata (s_axis_tdata), .s_tvalid (s_axis_tvalid), .s_tlast (s_axis_tlast),
    .s_tready(s_axis_tready),
    .beat_data (beat), .weight_we, .bias_we, .lut_we, .feature_we, .stall (rx_stall)
  );

  // ---------------- buffers ----------------
  kword_t weights [N_FILT][N_CH];
  acc_t   biases  [N_FILT];
  logic   fb_valid, fb_first, fb_last;
  logic [7:0] fb_batch;
  kword_t fb_win [N_CH];

  weight_buffer #(.DEPTH(WDEPTH)) u_weight_buffer (
    .clk, .rst_n,
    .wr_start (start && mode == RX_WEIGHT),
    .wr_base  ($clog2(WDEPTH)'(cfg.wbase)),
    .wr_valid (weight_we),
    .wr_data  (beat),
    .rd_addr  ($clog2(WDEPTH)'(cfg.wbase + fb_batch)),
    .rd_data  (weights)
  );

  bias_buffer #(.DEPTH(BDEPTH)) u_bias_buffer (
    .clk, .rst_n,
    .wr_start (start && mode == RX_BIAS),
    .wr_valid (bias_we),
    .wr_data  (beat),
    .rd_group ($clog2(BDEPTH)'(cfg.bgroup)),
    .rd_bias  (biases)
  );

  feature_buffer #(.LINE_DEPTH(LINE_DEPTH), .MAX_NB(MAX_NB)) u_feature_buffer (
    .clk, .rst_n,
    .start    (start),
    .cfg_w    (cfg.width),
    .cfg_nb   (cfg.nbatch),
    .in_valid (feature_we),
    .in_data  (beat),
    .win_valid(fb_valid),
    .win_first(fb_first),
    .win_last (fb_last),
    .win_batch(fb_batch),
    .window   (fb_win)
  );

  // the window waits one clock for its kernels to be read
  logic   cv_valid, cv_first, cv_last;
  kword_t cv_win [N_CH];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cv_valid <= 1'b0; cv_first <= 1'b0; cv_last <= 1'b0;
      for (int c = 0; c < N_CH; c++) cv_win[c] <= '0;
    end else begin
      cv_valid <= fb_valid;
      cv_first <= fb_first;
      cv_last  <= fb_last;
      cv_win   <= fb_win;
    end
  end

  // ---------------- CNN layer pipeline ----------------
  logic acc_valid, q_valid, a_valid, p_valid;
  acc_t acc [N_FILT];
  q8_t  qv  [N_FILT];
  q8_t  av  [N_FILT];
  q8_t  pv  [N_FILT];

  conv_top u_conv_top (
    .clk, .rst_n,
    .in_valid (cv_valid), .first (cv_first), .last (cv_last),
    .window (cv_win), .weights, .bias (biases),
    .out_valid (acc_valid), .acc
  );

  quant_int8 u_quant_int8 (
    .clk, .rst_n, .in_valid (acc_valid), .acc,
    .m1 (cfg.m1), .shift_n (cfg.shift_n), .z3 (cfg.z3),
    .out_valid (q_valid), .q (qv)
  );

  leaky_relu u_leaky_relu (
    .clk, .rst_n,
    .wr_start (start && mode == RX_LUT), .wr_valid (lut_we), .wr_data (beat),
    .enable (cfg.act_en), .in_valid (q_valid), .d (qv),
    .out_valid (a_valid), .q (av)
  );

  max_pool #(.MAX_W(POOL_MAX_W)) u_max_pool (
    .clk, .rst_n, .start, .mode (cfg.pool),
    .cfg_w (cfg.width - 12'd2),
    .in_valid (a_valid), .d (av),
    .out_valid (p_valid), .q (pv)
  );

  // ---------------- transmit side ----------------
  logic [AXIS_W-1:0] pix, fifo_data;
  logic fifo_empty, fifo_full, fifo_rd;

  always_comb
    for (int l = 0; l < N_FILT; l++) pix[8*l +: 8] = pv[l];

  tx_buffer #(.DEPTH(TX_DEPTH), .WIDTH(AXIS_W)) u_tx_buffer (
    .clk, .rst_n, .clear (start),
    .wr_en (p_valid), .wr_data (pix),
    .rd_en (fifo_rd), .rd_data (fifo_data),
    .empty (fifo_empty), .full (fifo_full), .free (tx_free)
  );

  stream_tx #(.DATA_W(AXIS_W)) u_stream_tx (
    .clk, .rst_n, .start, .cfg_beats (out_beats),
    .fifo_data, .fifo_empty, .fifo_rd,
    .m_tdata (m_axis_tdata), .m_tvalid (m_axis_tvalid), .m_tlast (m_axis_tlast),
    .m_tready (m_axis_tready), .done (tx_done)
  );

  // ---------------- upsample layer ----------------
  upsample #(.DATA_W(AXIS_W), .MAX_W(UP_MAX_W)) u_upsample (
    .clk, .rst_n, .start, .cfg_w (up_w), .cfg_h (up_h),
    .s_tdata (us_s_axis_tdata), .s_tvalid (us_s_axis_tvalid), .s_tready (us_s_axis_tready),
    .m_tdata (us_m_axis_tdata), .m_tvalid (us_m_axis_tvalid), .m_tlast (us_m_axis_tlast),
    .m_tready (us_m_axis_tready)
  );

  logic unused_full;
  assign unused_full = fifo_full;
endmodule
