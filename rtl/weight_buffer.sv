// weight_buffer: on-chip cache of convolution kernels.
//
// 8 groups (one per filter of the current pass) of 8 RAMs (one per input
// channel of a batch); every RAM is DEPTH words of 72 bits, one 3x3 kernel
// per word. Loading: byte f of each 64-bit beat belongs to filter f. Nine
// beats give the nine taps (tap k = 3*row + col lands in bits [8k+7:8k]) of
// one kernel for all eight filters at once; the word is then written into RAM
// 'channel' of every group. Beats run tap-fastest, then channel 0..7, then
// address, starting at wr_base after wr_start; the address wraps at DEPTH, so
// new weights overwrite the oldest. Reading: all 64 RAMs are read at rd_addr
// (the batch index) and rd_data appears one clock later.
// The 8x8 RAM array, 256 x 72 geometry, byte-per-filter lanes and 9-beat
// kernel load follow the paper; the channel/address order is this design's.
module weight_buffer
  import yolo_pkg::*;
#(
  parameter int unsigned DEPTH = 256
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_start,
  input  logic [$clog2(DEPTH)-1:0]  wr_base,
  input  logic                      wr_valid,
  input  logic [AXIS_W-1:0]         wr_data,
  input  logic [$clog2(DEPTH)-1:0]  rd_addr,
  output kword_t                    rd_data [N_FILT][N_CH]
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [3:0]    tap;
  logic [2:0]    ch;
  logic [AW-1:0] addr;
  logic [KW-9:0] shreg [N_FILT];   // first eight taps of the word being built
  logic          we;

  assign we = wr_valid && (tap == 4'(TAPS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tap  <= '0;
      ch   <= '0;
      addr <= '0;
    end else if (wr_start) begin
      tap  <= '0;
      ch   <= '0;
      addr <= wr_base;
    end else if (wr_valid) begin
      if (tap == 4'(TAPS - 1)) begin
        tap <= '0;
        ch  <= ch + 3'd1;
        if (ch == 3'(N_CH - 1)) addr <= addr + 1'b1;
      end else begin
        tap <= tap + 4'd1;
      end
    end
  end

  // tap k arrives k-th; shift right so tap 0 ends in the low byte
  always_ff @(posedge clk) begin
    if (wr_valid)
      for (int f = 0; f < N_FILT; f++)
        shreg[f] <= {wr_data[8*f +: 8], shreg[f][KW-9:8]};
  end

  for (genvar f = 0; f < N_FILT; f++) begin : g_filt
    for (genvar c = 0; c < N_CH; c++) begin : g_ch
      kword_t ram [DEPTH];
      always_ff @(posedge clk) begin
        if (we && ch == 3'(c)) ram[addr] <= {wr_data[8*f +: 8], shreg[f]};
        rd_data[f][c] <= ram[rd_addr];
      end
    end
  end
endmodule
