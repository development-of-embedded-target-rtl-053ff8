// tb_yolo_workload: runs passes of the YOLOv3-Tiny layers at their real sizes
// through the accelerator at its default parameters, as the processor would
// schedule them, and checks every output beat against the reference model.
// A layer with more than 8 output channels repeats the same pass for each
// group of 8 filters, so one pass per layer shape is run:
//  * the first layer: 416x416, 3 input channels, 2x2 stride-2 pooling;
//  * the same layer for a 208x208 input (the network at half scale);
//  * a 26x26 layer with 384 input channels (after the concatenation);
//  * the 13x13 layer with 256 input channels and stride-1 pooling;
//  * the 13x13 layer with 512 input channels (3x3, 1024 filters);
//  * the 13x13 1x1 layer with 1024 input channels (128 batches);
//  * the 13x13 1x1 output layer with 512 input channels, no activation;
//  * the 13x13 to 26x26 upsample.
// The requantisation shift of each pass is chosen so that the outputs
// spread over the int8 range: n = round(log2(sqrt(taps*channels)*74*23*M1/50)) - 15,
// with 74 and 23 the standard deviations of the random activations and
// weights. The clocks of each pass are printed next to (H+2)*(W+2)*batches.
module tb_yolo_workload;
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

  function automatic int pick_shift(int in_ch, bit one_by_one);
    real sd;
    sd = $sqrt(real'((one_by_one ? 1 : 9) * in_ch)) * 74.0 * 23.0 * 23000.0 / 50.0;
    return int'($ln(sd) / $ln(2.0) + 0.5) - 15;
  endfunction

  task automatic layer(string name, int w, int h, int in_ch, int wbase, pool_mode_e pool,
                       bit act, bit one_by_one);
    int t0 = cyc;
    int n = pick_shift(in_ch, one_by_one);
    run_layer(w, h, in_ch, wbase, 1, pool, act, one_by_one, 0, n);
    $display("%-34s %3dx%-3d in_ch %4d shift %2d: %7d clocks for the pass, streaming %7d",
             name, w, h, in_ch, n, cyc - t0, (h + 2) * (w + 2) * ((in_ch + 7) / 8));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    //                                     w    h  in_ch wbase pool       act 1x1
    layer("first layer, 3x3, pool s2",   416, 416,    3,   0, POOL_S2,   1,  0);
    layer("first layer at half scale",    208, 208,    3,  50, POOL_S2,   1,  0);
    layer("26x26 after concat, 3x3",      26,  26,  384,  10, POOL_NONE, 1,  0);
    layer("13x13 3x3, pool s1",           13,  13,  256, 100, POOL_S1,   1,  0);
    layer("13x13 3x3, 512 channels",      13,  13,  512, 200, POOL_NONE, 1,  0);
    layer("13x13 1x1, 1024 channels",     13,  13, 1024,   0, POOL_NONE, 1,  1);
    layer("13x13 1x1 output, linear",     13,  13,  512, 128, POOL_NONE, 0,  1);
    run_upsample(13, 13);
    chk(n_multibatch > 0, "mechanism: channel batches accumulated");
    chk(n_wrap > 0,       "mechanism: weight RAM address wrap");
    chk(n_pool_s2 > 0,    "mechanism: 2x2 stride-2 pooling");
    chk(n_pool_s1 > 0,    "mechanism: 2x2 stride-1 pooling");
    chk(n_pool_none > 0,  "mechanism: pooling bypass");
    chk(n_act_off > 0,    "mechanism: activation bypass");
    chk(n_1x1 > 0,        "mechanism: 1x1 layer via centre tap");
    chk(n_upsample > 0,   "mechanism: upsample");
    $display("mechanisms: batches=%0d wrap=%0d s2=%0d s1=%0d nopool=%0d act=%0d noact=%0d 1x1=%0d upsample=%0d",
             n_multibatch, n_wrap, n_pool_s2, n_pool_s1, n_pool_none, n_act_on, n_act_off, n_1x1, n_upsample);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
