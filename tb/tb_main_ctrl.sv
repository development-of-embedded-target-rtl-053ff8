// tb_main_ctrl: writes every configuration register through AXI4-Lite and
// reads it back, checks the decoded configuration outputs, the one-clock
// start pulse, the load mode, and busy/done around a feature pass.
module tb_main_ctrl;
  import yolo_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0]  s_axil_awaddr = 0, s_axil_araddr = 0;
  logic        s_axil_awvalid = 0, s_axil_wvalid = 0, s_axil_bready = 0, s_axil_arvalid = 0, s_axil_rready = 0;
  logic [31:0] s_axil_wdata = 0, s_axil_rdata;
  logic [3:0]  s_axil_wstrb = 0;
  logic        s_axil_awready, s_axil_wready, s_axil_bvalid, s_axil_arready, s_axil_rvalid;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic start, busy, tx_done = 0;
  rx_mode_e mode;
  layer_cfg_t cfg;
  logic [23:0] out_beats;
  logic [11:0] up_w, up_h;
  int checks = 0, failures = 0, starts = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && start) starts++;

  main_ctrl dut (.clk, .rst_n,
    .s_awaddr(s_axil_awaddr), .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata(s_axil_wdata), .s_wstrb(s_axil_wstrb), .s_wvalid(s_axil_wvalid), .s_wready(s_axil_wready),
    .s_bresp(s_axil_bresp), .s_bvalid(s_axil_bvalid), .s_bready(s_axil_bready),
    .s_araddr(s_axil_araddr), .s_arvalid(s_axil_arvalid), .s_arready(s_axil_arready),
    .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp), .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready),
    .start, .mode, .cfg, .out_beats, .up_w, .up_h, .tx_done, .busy);

  `include "axil_master.svh"

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (starts %0d mode %0d busy %b)", what, starts, mode, busy); end
  endtask

  initial begin
    logic [31:0] v [16];
    logic [31:0] mask [16];
    logic [31:0] r;
    mask = '{32'h0, 32'h0, 32'hfff, 32'hfff, 32'h1ff, 32'hff, 32'h7f, 32'hffff,
             32'h1f, 32'hff, 32'h1, 32'h3, 32'hffffff, 32'hfff, 32'hfff, 32'h0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 2; a <= 14; a++) begin
      v[a] = $urandom & mask[a];
      if (a == 11) v[a] = 32'(POOL_S1);
      axil_write(8'(4 * a), $urandom & ~mask[a] | v[a]);
    end
    for (int a = 2; a <= 14; a++) begin
      axil_read(8'(4 * a), r);
      chk(r == v[a], $sformatf("readback reg %0d: %h vs %h", a, r, v[a]));
    end
    chk(cfg.width == v[2][11:0] && cfg.height == v[3][11:0] && cfg.nbatch == v[4][8:0], "cfg geometry");
    chk(cfg.wbase == v[5][7:0] && cfg.bgroup == v[6][6:0] && cfg.m1 == v[7][15:0], "cfg addresses");
    chk(cfg.shift_n == v[8][4:0] && cfg.z3 == v[9][7:0] && cfg.act_en == v[10][0], "cfg quant");
    chk(cfg.pool == POOL_S1 && out_beats == v[12][23:0] && up_w == v[13][11:0] && up_h == v[14][11:0], "cfg misc");
    chk(starts == 0, "no start yet");
    // weight load: start pulse, mode, not busy
    axil_write(8'h00, 32'h11);
    chk(starts == 1 && mode == RX_WEIGHT && !busy, "weight start");
    // feature pass: busy until tx_done, then done
    axil_write(8'h00, 32'h41);
    chk(starts == 2 && mode == RX_FEATURE && busy, "feature start busy");
    repeat (20) @(negedge clk);
    axil_read(8'h04, r);
    chk(r[1:0] == 2'b01, "status busy");
    axil_read(8'h3C, r);
    chk(r > 20 && r < 40, $sformatf("cycle counter %0d", r));
    @(negedge clk) tx_done = 1;
    @(negedge clk) tx_done = 0;
    axil_read(8'h04, r);
    chk(r[1:0] == 2'b10 && !busy, "status done");
    axil_read(8'h00, r);
    chk(r[6:4] == 3'(RX_FEATURE), "mode readback");
    axil_write(8'h00, 32'h00);
    chk(starts == 2 && mode == RX_IDLE, "mode change without start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
