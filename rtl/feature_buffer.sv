// feature_buffer: line buffer that turns the input pixel stream into 3x3
// windows of 8 input channels, one window per clock.
//
// Input order: rows y, then columns x, then channel batches b (8 channels per
// 64-bit beat, channel c in byte c). The host sends the input already padded,
// so a row holds cfg_w pixels and every window lies inside the frame
// ("valid" convolution over the padded map, which equals a same-padded
// convolution of the original). Two line RAMs keep rows y-1 and y-2 at
// address x*nb+b; two column RAMs keep, per batch, the 3-pixel columns x-1 and
// x-2, so the window of batch b at (y,x) is complete when pixel (y,x,b)
// arrives. Windows with y>=2 and x>=2 are emitted with their batch index and
// first/last batch flags, two clocks after the beat. Tap k = 3*row + col of
// channel c is window[c][8k+7:8k], row 0 being the oldest row.
// The paper only names this buffer; the line-buffer organisation and the
// host-side padding are this design's choices. LINE_DEPTH must cover
// nb*cfg_w; MAX_NB bounds the batches.
module feature_buffer
  import yolo_pkg::*;
#(
  parameter int unsigned LINE_DEPTH = 2048,
  parameter int unsigned MAX_NB     = 256
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,        // new frame: clears counters
  input  logic [11:0]        cfg_w,        // padded row width
  input  logic [8:0]         cfg_nb,       // batches per pixel (1..MAX_NB)
  input  logic               in_valid,
  input  logic [AXIS_W-1:0]  in_data,
  output logic               win_valid,
  output logic               win_first,
  output logic               win_last,
  output logic [7:0]         win_batch,
  output kword_t             window [N_CH]
);
  localparam int unsigned LA = $clog2(LINE_DEPTH);
  localparam int unsigned BA = $clog2(MAX_NB);
  localparam int unsigned CW = 3 * AXIS_W;   // one column: rows y-2, y-1, y

  // ---- input counters ----
  logic [BA-1:0] b;
  logic [11:0]   x, y;
  logic [LA-1:0] la;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b <= '0; x <= '0; y <= '0; la <= '0;
    end else if (start) begin
      b <= '0; x <= '0; y <= '0; la <= '0;
    end else if (in_valid) begin
      if (9'(b) == cfg_nb - 9'd1) begin
        b <= '0;
        if (x == cfg_w - 12'd1) begin
          x  <= '0;
          y  <= y + 12'd1;
          la <= '0;
        end else begin
          x  <= x + 12'd1;
          la <= la + 1'b1;
        end
      end else begin
        b  <= b + 1'b1;
        la <= la + 1'b1;
      end
    end
  end

  // ---- stage 1: read line and column RAMs ----
  logic [AXIS_W-1:0] line1 [LINE_DEPTH];   // row y-1
  logic [AXIS_W-1:0] line2 [LINE_DEPTH];   // row y-2
  logic [CW-1:0]     colh1 [MAX_NB];       // column x-1 per batch
  logic [CW-1:0]     colh2 [MAX_NB];       // column x-2 per batch

  logic              s1_v, s1_byp, s1_first, s1_last, s1_win;
  logic [BA-1:0]     s1_b;
  logic [LA-1:0]     s1_la;
  logic [AXIS_W-1:0] s1_d, l1_q, l2_q;
  logic [CW-1:0]     c1_q, c2_q;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      l1_q      <= line1[la];
      l2_q      <= line2[la];
      line1[la] <= in_data;
      c1_q      <= colh1[b];
      c2_q      <= colh2[b];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_byp <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_win <= 1'b0;
      s1_b <= '0; s1_la <= '0; s1_d <= '0;
    end else begin
      s1_v <= in_valid && !start;
      if (in_valid) begin
        s1_byp   <= s1_v && (s1_b == b);  // column RAM written this same clock
        s1_first <= (b == '0);
        s1_last  <= (9'(b) == cfg_nb - 9'd1);
        s1_win   <= (y >= 12'd2) && (x >= 12'd2);
        s1_b     <= b;
        s1_la    <= la;
        s1_d     <= in_data;
      end
    end
  end

  // ---- stage 2: assemble the window, update history ----
  logic [CW-1:0] col0, col1, col2;   // columns x-2, x-1, x
  logic [CW-1:0] last_col2, last_col1;

  always_comb begin
    col2 = {s1_d, l1_q, l2_q};                 // [63:0]=row y-2 ... [191:128]=row y
    col1 = s1_byp ? last_col2 : c1_q;
    col0 = s1_byp ? last_col1 : c2_q;
  end

  always_ff @(posedge clk) begin
    if (s1_v) begin
      line2[s1_la] <= l1_q;
      colh1[s1_b]  <= col2;
      colh2[s1_b]  <= col1;
      last_col2    <= col2;
      last_col1    <= col1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_valid <= 1'b0; win_first <= 1'b0; win_last <= 1'b0; win_batch <= '0;
      for (int c = 0; c < N_CH; c++) window[c] <= '0;
    end else begin
      win_valid <= s1_v && s1_win;
      if (s1_v) begin
        win_first <= s1_first;
        win_last  <= s1_last;
        win_batch <= 8'(s1_b);
        for (int c = 0; c < N_CH; c++)
          for (int r = 0; r < 3; r++) begin
            window[c][8*(3*r+0) +: 8] <= col0[AXIS_W*r + 8*c +: 8];
            window[c][8*(3*r+1) +: 8] <= col1[AXIS_W*r + 8*c +: 8];
            window[c][8*(3*r+2) +: 8] <= col2[AXIS_W*r + 8*c +: 8];
          end
      end
    end
  end
endmodule
