// bias_buffer: fused bias storage.
//
// Holds the BN-folded 32-bit biases of up to 8*DEPTH output channels. Each
// 64-bit load beat carries two biases (lower word first); biases are written
// in output-channel order from channel 0 after wr_start. Channel n lands in
// lane n mod 8 at group n / 8, so one read returns the eight biases of filter
// group rd_group, one clock later. The paper names the buffer and adds the
// bias in the last batch; the 32-bit format, depth and load order are this
// design's choices.
module bias_buffer
  import yolo_pkg::*;
#(
  parameter int unsigned DEPTH = 128
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_start,
  input  logic                      wr_valid,
  input  logic [AXIS_W-1:0]         wr_data,
  input  logic [$clog2(DEPTH)-1:0]  rd_group,
  output acc_t                      rd_bias [N_FILT]
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [AW-1:0] grp;    // group being written
  logic [1:0]    pair;   // which lane pair within the group

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grp  <= '0;
      pair <= '0;
    end else if (wr_start) begin
      grp  <= '0;
      pair <= '0;
    end else if (wr_valid) begin
      pair <= pair + 2'd1;
      if (pair == 2'd3) grp <= grp + 1'b1;
    end
  end

  for (genvar l = 0; l < N_FILT; l++) begin : g_lane
    acc_t ram [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_valid && pair == 2'(l / 2)) ram[grp] <= wr_data[32*(l % 2) +: 32];
      rd_bias[l] <= ram[rd_group];
    end
  end
endmodule
