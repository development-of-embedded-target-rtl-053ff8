// axil_master.svh: AXI4-Lite write and read tasks for testbenches. Expects
// clk and the s_axil_* signals of the device under test in scope.
task automatic axil_write(input logic [7:0] addr, input logic [31:0] data);
  @(negedge clk);
  s_axil_awaddr = addr; s_axil_awvalid = 1;
  s_axil_wdata = data;  s_axil_wstrb = 4'hf; s_axil_wvalid = 1;
  s_axil_bready = 1;
  do @(posedge clk); while (!(s_axil_awready && s_axil_wready));
  @(negedge clk);
  s_axil_awvalid = 0; s_axil_wvalid = 0;
  while (!s_axil_bvalid) @(negedge clk);
  @(negedge clk);
  s_axil_bready = 0;
endtask

task automatic axil_read(input logic [7:0] addr, output logic [31:0] data);
  @(negedge clk);
  s_axil_araddr = addr; s_axil_arvalid = 1; s_axil_rready = 1;
  do @(posedge clk); while (!s_axil_arready);
  @(negedge clk);
  s_axil_arvalid = 0;
  while (!s_axil_rvalid) @(negedge clk);
  data = s_axil_rdata;
  @(negedge clk);
  s_axil_rready = 0;
endtask
