// yolo_box: draws the detection boxes over the display video.
//
// The processor writes up to N_BOX rectangles through AXI4-Lite, already in
// display coordinates. The video (RGB888 with active, hsync and vsync, as it
// leaves the stream-to-video converter) passes through one register stage;
// a pixel on the outline of an enabled box, THICK pixels wide on the inside
// of the rectangle, is replaced by BOX_RGB (red). Pixel coordinates are
// counted from the video itself: x counts active pixels of a line, y counts
// lines, a rising vsync restarts both.
// Register map: box i at 8*i: word 0 = {y0[27:16], x0[11:0]},
// word 1 = {enable[31], y1[27:16], x1[11:0]}; boxes are inclusive
// rectangles. Writes to a box take effect at once.
// The publication states that the detection results are combined with the
// original image for display and shows red rectangles; the register map,
// box count, thickness and pass-through timing are this design's choices.
module yolo_box #(
  parameter int unsigned N_BOX   = 16,
  parameter int unsigned THICK   = 2,
  parameter logic [23:0] BOX_RGB = 24'hFF0000
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave (box registers)
  input  logic [7:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [7:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // video in
  input  logic        vid_active,
  input  logic        vid_hsync,
  input  logic        vid_vsync,
  input  logic [23:0] vid_rgb,
  // video out
  output logic        out_active,
  output logic        out_hsync,
  output logic        out_vsync,
  output logic [23:0] out_rgb
);
  localparam int unsigned BI = $clog2(N_BOX);

  typedef struct packed {
    logic        en;
    logic [11:0] x0, y0, x1, y1;
  } box_t;

  box_t boxes [N_BOX];

  // ---------------- AXI4-Lite ----------------
  logic wr_take;
  logic [BI-1:0] wbox, rbox;
  assign wr_take   = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_take;
  assign s_wready  = wr_take;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;
  assign wbox      = BI'(s_awaddr[7:3]);
  assign rbox      = BI'(s_araddr[7:3]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0;
      for (int i = 0; i < N_BOX; i++) boxes[i] <= '0;
    end else begin
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_take) begin
        s_bvalid <= 1'b1;
        if (!s_awaddr[2]) begin
          boxes[wbox].x0 <= s_wdata[11:0];
          boxes[wbox].y0 <= s_wdata[27:16];
        end else begin
          boxes[wbox].x1 <= s_wdata[11:0];
          boxes[wbox].y1 <= s_wdata[27:16];
          boxes[wbox].en <= s_wdata[31];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        s_rdata  <= s_araddr[2] ? {boxes[rbox].en, 3'd0, boxes[rbox].y1, 4'd0, boxes[rbox].x1}
                                : {4'd0, boxes[rbox].y0, 4'd0, boxes[rbox].x0};
      end
    end
  end

  // ---------------- pixel position ----------------
  logic [11:0] x, y;
  logic        vs_q, act_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; y <= '0; vs_q <= 1'b0; act_q <= 1'b0;
    end else begin
      vs_q  <= vid_vsync;
      act_q <= vid_active;
      if (vid_vsync && !vs_q) begin
        x <= '0;
        y <= '0;
      end else if (vid_active) begin
        x <= x + 12'd1;
      end else if (act_q) begin       // end of an active line
        x <= '0;
        y <= y + 12'd1;
      end
    end
  end

  // ---------------- outline test ----------------
  logic on_edge;
  always_comb begin
    on_edge = 1'b0;
    for (int i = 0; i < N_BOX; i++) begin
      logic in_box, near;
      in_box = (x >= boxes[i].x0) && (x <= boxes[i].x1) && (y >= boxes[i].y0) && (y <= boxes[i].y1);
      near   = (x < boxes[i].x0 + 12'(THICK)) || (x + 12'(THICK) > boxes[i].x1) ||
               (y < boxes[i].y0 + 12'(THICK)) || (y + 12'(THICK) > boxes[i].y1);
      if (boxes[i].en && in_box && near) on_edge = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_active <= 1'b0; out_hsync <= 1'b0; out_vsync <= 1'b0; out_rgb <= '0;
    end else begin
      out_active <= vid_active;
      out_hsync  <= vid_hsync;
      out_vsync  <= vid_vsync;
      out_rgb    <= (vid_active && on_edge) ? BOX_RGB : vid_rgb;
    end
  end

  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_bvalid && !s_bready |=> s_bvalid)
    else $error("yolo_box: BVALID dropped before BREADY");
endmodule
