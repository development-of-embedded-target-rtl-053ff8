// yolo_pkg: constants and types shared by the YOLOv3-Tiny accelerator.
//
// The accelerator computes 8 filters x 8 input channels x 3x3 taps of int8
// multiply-accumulate per clock. A stream beat is 64 bits: one byte per
// filter while loading weights, one byte per input channel while streaming
// feature data, one byte per output channel on the result stream.
// The 8x8 organisation, the 3x3 kernel words of 72 bits, the 64-bit stream
// and the 256-deep weight RAMs follow the paper; the register map, load modes
// and accumulator widths are this design's own choices.
package yolo_pkg;

  localparam int unsigned N_FILT   = 8;   // filters per pass (weight RAM groups)
  localparam int unsigned N_CH     = 8;   // input channels per batch (RAMs per group)
  localparam int unsigned TAPS     = 9;   // 3x3 kernel
  localparam int unsigned KW       = 8 * TAPS;   // 72-bit kernel / window word
  localparam int unsigned AXIS_W   = 64;  // stream data width
  localparam int unsigned ACC_W    = 32;  // accumulator and bias width

  typedef logic signed [7:0]        q8_t;     // int8 activation or weight
  typedef logic        [KW-1:0]     kword_t;  // 3x3 word, tap k at [8k+7:8k]
  typedef logic signed [ACC_W-1:0]  acc_t;

  // What the receive stream carries, selected through the control registers.
  typedef enum logic [2:0] {
    RX_IDLE    = 3'd0,
    RX_WEIGHT  = 3'd1,
    RX_BIAS    = 3'd2,
    RX_LUT     = 3'd3,
    RX_FEATURE = 3'd4
  } rx_mode_e;

  // Pooling after the activation.
  typedef enum logic [1:0] {
    POOL_NONE = 2'd0,
    POOL_S2   = 2'd1,   // 2x2 window, stride 2
    POOL_S1   = 2'd2    // 2x2 window, stride 1
  } pool_mode_e;

  // Per-pass configuration written by the host through main_ctrl.
  typedef struct packed {
    logic [11:0] width;      // padded input row width (pixels)
    logic [11:0] height;     // padded input rows
    logic [8:0]  nbatch;     // input-channel batches of 8 (1..256)
    logic [7:0]  wbase;      // weight RAM address of batch 0
    logic [6:0]  bgroup;     // bias group (output channels 8*bgroup..+7)
    logic [15:0] m1;         // requantisation multiplier M1
    logic [4:0]  shift_n;    // n of eq. (8): shift by n+15
    logic signed [7:0] z3;   // output zero point
    logic        act_en;     // apply the activation table
    pool_mode_e  pool;       // pooling mode
  } layer_cfg_t;

endpackage
