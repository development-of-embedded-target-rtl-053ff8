// tb_stream_rx: drives each load mode and checks that exactly one
// destination strobe follows an accepted beat, that idle mode accepts
// nothing, and that in feature mode TREADY falls (and stall rises) exactly
// when the free space of the output buffer is not above the credit.
module tb_stream_rx;
  import yolo_pkg::*;
  rx_mode_e mode;
  logic [9:0] tx_free;
  logic [63:0] s_tdata, beat_data;
  logic s_tvalid, s_tlast, s_tready, weight_we, bias_we, lut_we, feature_we, stall;
  int checks = 0, failures = 0;

  stream_rx #(.CREDIT(16), .FREE_W(10)) dut (.mode, .tx_free, .s_tdata, .s_tvalid, .s_tlast,
    .s_tready, .beat_data, .weight_we, .bias_we, .lut_we, .feature_we, .stall);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (mode %0d free %0d valid %b)", what, mode, tx_free, s_tvalid); end
  endtask

  initial begin
    rx_mode_e modes [5] = '{RX_IDLE, RX_WEIGHT, RX_BIAS, RX_LUT, RX_FEATURE};
    s_tlast = 0;
    for (int i = 0; i < 2000; i++) begin
      bit rdy;
      mode = modes[i % 5];
      tx_free = 10'($urandom_range(0, 40));
      s_tvalid = $urandom_range(0, 1);
      s_tdata = {$urandom, $urandom};
      #1;
      rdy = (mode == RX_WEIGHT || mode == RX_BIAS || mode == RX_LUT) ||
            (mode == RX_FEATURE && tx_free > 16);
      chk(s_tready == rdy, "tready");
      chk(weight_we  == (s_tvalid && rdy && mode == RX_WEIGHT),  "weight_we");
      chk(bias_we    == (s_tvalid && rdy && mode == RX_BIAS),    "bias_we");
      chk(lut_we     == (s_tvalid && rdy && mode == RX_LUT),     "lut_we");
      chk(feature_we == (s_tvalid && rdy && mode == RX_FEATURE), "feature_we");
      chk(stall == (s_tvalid && !rdy && mode == RX_FEATURE), "stall");
      chk(beat_data == s_tdata, "data");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
