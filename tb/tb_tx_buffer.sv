// tb_tx_buffer: random pushes and pops against a queue model; checks data
// order, empty/full flags and the free-slot count, and fills the FIFO to full.
module tb_tx_buffer;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0, clear = 0, wr_en = 0, rd_en = 0;
  logic [63:0] wr_data = 0, rd_data;
  logic empty, full;
  logic [4:0] free;
  logic [63:0] model [$];
  int checks = 0, failures = 0;
  int saw_full = 0;

  always #5 clk = ~clk;
  tx_buffer #(.DEPTH(DEPTH), .WIDTH(64)) dut (.clk, .rst_n, .clear, .wr_en, .wr_data, .rd_en,
                                             .rd_data, .empty, .full, .free);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks += 3;
      if (empty != (model.size() == 0)) begin failures++; $display("empty flag wrong"); end
      if (full != (model.size() == DEPTH)) begin failures++; $display("full flag wrong"); end
      if (int'(free) != DEPTH - model.size()) begin failures++; $display("free %0d exp %0d", free, DEPTH - model.size()); end
      if (full) saw_full++;
      if (!empty) begin
        checks++;
        if (rd_data !== model[0]) begin failures++; $display("head got %h exp %h", rd_data, model[0]); end
      end
      // phase-dependent bias so the FIFO runs both full and empty
      wr_en = !full && ($urandom_range(0, 9) < ((i / 500) % 2 ? 8 : 3));
      rd_en = !empty && ($urandom_range(0, 9) < ((i / 500) % 2 ? 3 : 8));
      wr_data = {$urandom, $urandom};
      @(posedge clk);
      if (rd_en) void'(model.pop_front());
      if (wr_en) model.push_back(wr_data);
      #1 wr_en = 0; rd_en = 0;
    end
    checks++;
    if (saw_full == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
