// main_ctrl: AXI4-Lite register file through which the processor drives the
// accelerator.
//
// Register map (32-bit, byte addresses):
//   0x00 CTRL    [0] start (write 1: one-clock pulse), [6:4] load mode
//   0x04 STATUS  [0] busy, [1] done (set when a feature pass has sent its
//                last result, cleared by start)   read only
//   0x08 WIDTH   padded input row width      0x0C HEIGHT  padded input rows
//   0x10 NBATCH  input-channel batches of 8  0x14 WBASE   weight RAM address
//   0x18 BGROUP  bias group                  0x1C M1      requant multiplier
//   0x20 SHIFT   n of the 2^-(n+15) scale    0x24 Z3      output zero point
//   0x28 ACT_EN  activation table on         0x2C POOL    pooling mode
//   0x30 OUT_BEATS result beats of the pass  0x34 UP_W    upsample width
//   0x38 UP_H    upsample height             0x3C CYCLES  busy clocks (RO)
// A write is taken when AWVALID and WVALID are both high and no response is
// pending; the response follows one clock later. A read answers one clock
// after ARVALID. WSTRB is ignored. Starting in feature mode sets busy until
// tx_done. The paper states that the processor controls the accelerator over
// AXI4-Lite through main_ctrl; the register map is this design's.
module main_ctrl
  import yolo_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [7:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [7:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // to the datapath
  output logic        start,
  output rx_mode_e    mode,
  output layer_cfg_t  cfg,
  output logic [23:0] out_beats,
  output logic [11:0] up_w,
  output logic [11:0] up_h,
  input  logic        tx_done,
  output logic        busy
);
  logic done;
  logic [31:0] cycles;
  logic wr_take;

  assign s_awready = wr_take;
  assign s_wready  = wr_take;
  assign wr_take   = s_awvalid && s_wvalid && !s_bvalid;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;

  logic unused_strb;
  assign unused_strb = ^s_wstrb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start     <= 1'b0;
      mode      <= RX_IDLE;
      cfg       <= '0;
      out_beats <= '0;
      up_w      <= '0;
      up_h      <= '0;
      s_bvalid  <= 1'b0;
      busy      <= 1'b0;
      done      <= 1'b0;
      cycles    <= '0;
    end else begin
      start <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (busy) cycles <= cycles + 32'd1;
      if (tx_done) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
      if (wr_take) begin
        s_bvalid <= 1'b1;
        unique case (s_awaddr[7:2])
          6'h00: begin
            mode  <= rx_mode_e'(s_wdata[6:4]);
            start <= s_wdata[0];
            if (s_wdata[0]) begin
              done   <= 1'b0;
              busy   <= (rx_mode_e'(s_wdata[6:4]) == RX_FEATURE);
              cycles <= '0;
            end
          end
          6'h02: cfg.width   <= s_wdata[11:0];
          6'h03: cfg.height  <= s_wdata[11:0];
          6'h04: cfg.nbatch  <= s_wdata[8:0];
          6'h05: cfg.wbase   <= s_wdata[7:0];
          6'h06: cfg.bgroup  <= s_wdata[6:0];
          6'h07: cfg.m1      <= s_wdata[15:0];
          6'h08: cfg.shift_n <= s_wdata[4:0];
          6'h09: cfg.z3      <= s_wdata[7:0];
          6'h0A: cfg.act_en  <= s_wdata[0];
          6'h0B: cfg.pool    <= pool_mode_e'(s_wdata[1:0]);
          6'h0C: out_beats   <= s_wdata[23:0];
          6'h0D: up_w        <= s_wdata[11:0];
          6'h0E: up_h        <= s_wdata[11:0];
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        unique case (s_araddr[7:2])
          6'h00: s_rdata <= {25'd0, mode, 4'd0};
          6'h01: s_rdata <= {30'd0, done, busy};
          6'h02: s_rdata <= {20'd0, cfg.width};
          6'h03: s_rdata <= {20'd0, cfg.height};
          6'h04: s_rdata <= {23'd0, cfg.nbatch};
          6'h05: s_rdata <= {24'd0, cfg.wbase};
          6'h06: s_rdata <= {25'd0, cfg.bgroup};
          6'h07: s_rdata <= {16'd0, cfg.m1};
          6'h08: s_rdata <= {27'd0, cfg.shift_n};
          6'h09: s_rdata <= {24'd0, cfg.z3};
          6'h0A: s_rdata <= {31'd0, cfg.act_en};
          6'h0B: s_rdata <= {30'd0, cfg.pool};
          6'h0C: s_rdata <= {8'd0, out_beats};
          6'h0D: s_rdata <= {20'd0, up_w};
          6'h0E: s_rdata <= {20'd0, up_h};
          6'h0F: s_rdata <= cycles;
          default: s_rdata <= 32'hDEAD_BEEF;
        endcase
      end
    end
  end

  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_bvalid && !s_bready |=> s_bvalid)
    else $error("main_ctrl: BVALID dropped before BREADY");
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata))
    else $error("main_ctrl: RVALID dropped or RDATA changed before RREADY");
endmodule
