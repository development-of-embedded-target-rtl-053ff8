// stream_tx: AXI4-Stream master for layer results.
//
// Presents the head of tx_buffer as m_tdata whenever the buffer is not empty
// and pops it on each accepted beat (tvalid && tready). A beat counter raises
// m_tlast on beat number cfg_beats of the pass and pulses 'done' when that
// beat is accepted. tvalid, once high, stays high with stable data until
// accepted, as the AXI4-Stream rules require (asserted below). The paper
// names the block and its AXI4-Stream port; the counting is this design's.
module stream_tx #(
  parameter int unsigned DATA_W = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [23:0]        cfg_beats,   // beats in this pass (>=1)
  // from tx_buffer
  input  logic [DATA_W-1:0]  fifo_data,
  input  logic               fifo_empty,
  output logic               fifo_rd,
  // AXI4-Stream master
  output logic [DATA_W-1:0]  m_tdata,
  output logic               m_tvalid,
  output logic               m_tlast,
  input  logic               m_tready,
  output logic               done
);
  logic [23:0] cnt;

  assign m_tvalid = !fifo_empty;
  assign m_tdata  = fifo_data;
  assign m_tlast  = (cnt == cfg_beats - 24'd1);
  assign fifo_rd  = m_tvalid && m_tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        cnt <= '0;
      end else if (fifo_rd) begin
        if (m_tlast) begin
          cnt  <= '0;
          done <= 1'b1;
        end else begin
          cnt <= cnt + 24'd1;
        end
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata))
    else $error("stream_tx: tvalid dropped or data changed before tready");
endmodule
