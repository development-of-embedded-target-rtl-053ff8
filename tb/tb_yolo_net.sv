// tb_yolo_net: end-to-end test of the accelerator at its default sizes.
//
// A host model drives the AXI4-Lite registers and the input stream exactly
// as the processor would: it loads kernels, biases and the LeakyReLU table,
// configures a pass and streams the zero-padded input map. Results from the
// output stream are compared with a reference computed here from the same
// numbers (same-padded 3x3 convolution over 8*nb input channels, bias,
// requantisation, table, pooling). Passes cover: several channel batches,
// the weight address wrapping past the top of the weight RAMs, all three
// pooling modes, the table on and off, a 1x1 layer (centre tap only), a
// stalled output stream that back-pressures the input, and the upsample
// stream. It checks one input beat per clock while the output keeps up,
// TLAST, the done status, and counts how often each mechanism happened.
module tb_yolo_net;
  import yolo_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0]  s_axil_awaddr = 0, s_axil_araddr = 0;
  logic        s_axil_awvalid = 0, s_axil_wvalid = 0, s_axil_bready = 0, s_axil_arvalid = 0, s_axil_rready = 0;
  logic [31:0] s_axil_wdata = 0, s_axil_rdata;
  logic [3:0]  s_axil_wstrb = 0;
  logic        s_axil_awready, s_axil_wready, s_axil_bvalid, s_axil_arready, s_axil_rvalid;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic [63:0] s_axis_tdata = 0, m_axis_tdata, us_s_axis_tdata = 0, us_m_axis_tdata;
  logic s_axis_tvalid = 0, s_axis_tlast = 0, s_axis_tready;
  logic m_axis_tvalid, m_axis_tlast, m_axis_tready = 1;
  logic us_s_axis_tvalid = 0, us_s_axis_tready, us_m_axis_tvalid, us_m_axis_tlast, us_m_axis_tready = 1;
  logic busy, rx_stall;

  int checks = 0, failures = 0;
  int cyc = 0;
  // mechanism counters
  int n_multibatch = 0, n_wrap = 0, n_pool_s2 = 0, n_pool_s1 = 0, n_pool_none = 0;
  int n_act_on = 0, n_act_off = 0, n_1x1 = 0, n_stall_cycles = 0, n_upsample = 0;

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (rx_stall) n_stall_cycles++;
  end

  yolo_net dut (.*);

  `include "axil_master.svh"

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  `include "yolo_host.svh"

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    //        w   h  nb wbase bgroup pool       act 1x1 hold
    run_pass( 6,  6, 2,   0,  1,     POOL_S2,   1,  0,  0);
    run_pass( 5,  4, 3, 254,  0,     POOL_S1,   1,  0,  0);
    run_pass( 7,  5, 1,  10,  2,     POOL_NONE, 0,  0,  0);
    run_pass(24, 24, 1,  20,  3,     POOL_NONE, 1,  1,  1500);
    run_upsample(4, 3);
    chk(n_multibatch > 0,   "mechanism: channel batches accumulated");
    chk(n_wrap > 0,         "mechanism: weight RAM address wrap");
    chk(n_pool_s2 > 0,      "mechanism: 2x2 stride-2 pooling");
    chk(n_pool_s1 > 0,      "mechanism: 2x2 stride-1 pooling");
    chk(n_pool_none > 0,    "mechanism: pooling bypass");
    chk(n_act_on > 0,       "mechanism: activation table");
    chk(n_act_off > 0,      "mechanism: activation bypass");
    chk(n_1x1 > 0,          "mechanism: 1x1 layer via centre tap");
    chk(n_stall_cycles > 0, "mechanism: input stalled by output back-pressure");
    chk(n_upsample > 0,     "mechanism: upsample");
    $display("mechanisms: batches=%0d wrap=%0d s2=%0d s1=%0d nopool=%0d act=%0d noact=%0d 1x1=%0d stall_cycles=%0d upsample=%0d",
             n_multibatch, n_wrap, n_pool_s2, n_pool_s1, n_pool_none, n_act_on, n_act_off, n_1x1,
             n_stall_cycles, n_upsample);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
