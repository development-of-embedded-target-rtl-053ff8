// tx_buffer: output FIFO between the layer pipeline and stream_tx.
//
// A first-word-fall-through FIFO of DEPTH words: rd_data shows the oldest
// word whenever empty is low, and rd_en pops it. 'free' counts empty slots;
// the receive side uses it to stop accepting feature beats while the
// pipeline could overrun the FIFO, so a stalled output stream stalls the
// input stream instead of losing data. Writing a full FIFO is a protocol
// error and is asserted against. The paper names the buffer only; the FIFO
// form, its depth and the credit use are this design's choices.
module tx_buffer #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 64
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      wr_en,
  input  logic [WIDTH-1:0]          wr_data,
  input  logic                      rd_en,
  output logic [WIDTH-1:0]          rd_data,
  output logic                      empty,
  output logic                      full,
  output logic [$clog2(DEPTH):0]    free
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wp, rp, count;

  assign count   = wp - rp;
  assign empty   = (count == '0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign free    = (AW+1)'(DEPTH) - count;
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else if (clear) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_en && !full)  wp <= wp + 1'b1;
      if (rd_en && !empty) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp[AW-1:0]] <= wr_data;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full))
    else $error("tx_buffer: write while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty))
    else $error("tx_buffer: read while empty");
endmodule
