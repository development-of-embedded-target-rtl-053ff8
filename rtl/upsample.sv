// upsample: 2x nearest-neighbour upsampling of an 8-channel feature stream.
//
// One row of cfg_w pixels (64 bits each) is taken from the input stream into
// a row buffer; the row is then sent twice, each pixel twice, so a cfg_w x
// cfg_h map leaves as 2cfg_w x 2cfg_h. m_tlast marks the last beat of the
// frame. Input and output are AXI4-Stream; the input is held off while a row
// is being sent, so the unit alternates between filling and emitting.
// The paper names the layer (13x13 to 26x26 in YOLOv3-Tiny) and gives it its
// own AXI4-Stream port; the row-buffer scheme is this design's choice.
module upsample #(
  parameter int unsigned DATA_W = 64,
  parameter int unsigned MAX_W  = 13
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [11:0]        cfg_w,
  input  logic [11:0]        cfg_h,
  input  logic [DATA_W-1:0]  s_tdata,
  input  logic               s_tvalid,
  output logic               s_tready,
  output logic [DATA_W-1:0]  m_tdata,
  output logic               m_tvalid,
  output logic               m_tlast,
  input  logic               m_tready
);
  typedef enum logic {FILL, EMIT} state_e;
  state_e st;

  localparam int unsigned XW = $clog2(MAX_W);
  logic [DATA_W-1:0] rowbuf [MAX_W];
  logic [11:0] wx;            // pixels filled
  logic [12:0] ox;            // output column 0..2w-1
  logic        orep;          // which copy of the row
  logic [11:0] iy;            // input row being handled

  assign s_tready = (st == FILL);
  assign m_tvalid = (st == EMIT);
  assign m_tdata  = rowbuf[XW'(ox[12:1])];
  assign m_tlast  = (st == EMIT) && orep && (ox == {cfg_w, 1'b0} - 13'd1) && (iy == cfg_h - 12'd1);

  always_ff @(posedge clk) begin
    if (st == FILL && s_tvalid) rowbuf[XW'(wx)] <= s_tdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= FILL; wx <= '0; ox <= '0; orep <= 1'b0; iy <= '0;
    end else if (start) begin
      st <= FILL; wx <= '0; ox <= '0; orep <= 1'b0; iy <= '0;
    end else if (st == FILL) begin
      if (s_tvalid) begin
        if (wx == cfg_w - 12'd1) begin
          wx <= '0;
          st <= EMIT;
        end else begin
          wx <= wx + 12'd1;
        end
      end
    end else if (m_tready) begin
      if (ox == {cfg_w, 1'b0} - 13'd1) begin
        ox   <= '0;
        orep <= !orep;
        if (orep) begin
          st <= FILL;
          iy <= (iy == cfg_h - 12'd1) ? 12'd0 : iy + 12'd1;
        end
      end else begin
        ox <= ox + 13'd1;
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata))
    else $error("upsample: output changed before tready");
endmodule
