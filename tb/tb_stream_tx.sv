// tb_stream_tx: a queue stands in for tx_buffer; beats are offered with
// random gaps and the sink applies random back-pressure. Checks the data
// order, TLAST on exactly the last beat of each pass, the done pulse, and
// that TVALID/TDATA hold while TREADY is low (also asserted in the block).
module tb_stream_tx;
  logic clk = 0, rst_n = 0, start = 0;
  logic [23:0] cfg_beats = 0;
  logic [63:0] fifo_data, m_tdata;
  logic fifo_empty, fifo_rd, m_tvalid, m_tlast, m_tready = 0, done;
  logic [63:0] q [$];
  int checks = 0, failures = 0;
  int sent = 0, dones = 0;

  always #5 clk = ~clk;
  assign fifo_empty = (q.size() == 0);
  assign fifo_data  = fifo_empty ? 64'd0 : q[0];

  stream_tx dut (.clk, .rst_n, .start, .cfg_beats, .fifo_data, .fifo_empty, .fifo_rd,
                 .m_tdata, .m_tvalid, .m_tlast, .m_tready, .done);

  int expect_idx = 0;
  always @(posedge clk) if (rst_n) begin
    if (done) dones++;
    if (m_tvalid && m_tready) begin
      checks += 2;
      if (m_tdata !== 64'(expect_idx)) begin failures++; $display("data %0d exp %0d", m_tdata, expect_idx); end
      if (m_tlast != (sent == int'(cfg_beats) - 1)) begin failures++; $display("tlast wrong at beat %0d", sent); end
      sent = (sent == int'(cfg_beats) - 1) ? 0 : sent + 1;
      expect_idx++;
      void'(q.pop_front());
    end
  end

  initial begin
    int pushed = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    cfg_beats = 24'd37;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (int i = 0; i < 2000; i++) begin
      if (pushed < 37 * 5 && $urandom_range(0, 2) != 0) begin q.push_back(64'(pushed)); pushed++; end
      m_tready = ($urandom_range(0, 3) != 0);
      @(negedge clk);
    end
    checks += 2;
    if (expect_idx != 37 * 5) begin failures++; $display("sent %0d beats", expect_idx); end
    if (dones != 5) begin failures++; $display("done pulses %0d", dones); end
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
