// yolo_host.svh: host model of the accelerator, included inside a testbench
// module. It expects in scope: clk, rst_n, the s_axil_* / s_axis_* / m_axis_*
// / us_* signals of the accelerator, the axil_write/axil_read tasks, a chk
// task, the cycle counter cyc and the mechanism counters n_*. It provides
// run_layer (load kernels, biases and table, configure, stream one padded
// map of any size and channel count, compare every output beat with a
// reference computed here), run_pass (run_layer on whole batches) and
// run_upsample (stream a map through the nearest-neighbour upsampler and
// compare). The register map and stream orders follow the accelerator.
  // ---------------- output collection ----------------
  logic [63:0] outq [$];
  int lastq [$];
  always @(posedge clk) if (rst_n && m_axis_tvalid && m_axis_tready) begin
    outq.push_back(m_axis_tdata);
    if (m_axis_tlast) lastq.push_back(outq.size());
  end

  // ---------------- stream helpers ----------------
  task automatic send(input logic [63:0] d);
    s_axis_tdata = d;
    s_axis_tvalid = 1;
    @(posedge clk);
    while (!s_axis_tready) @(posedge clk);
    #1 s_axis_tvalid = 0;
  endtask

  // ---------------- the model of one pass ----------------
  typedef logic signed [7:0] s8;
  s8  wts  [];                 // [(filter * channels + channel) * 9 + tap]
  s8  fmap [];                 // [(y * w + x) * channels + channel], unpadded
  int bias_all [32];
  s8  lut  [256];

  function automatic s8 requant(longint a, int m1, int n, int z3);
    longint r;
    r = ((a * m1) + (64'sd1 <<< (n + 14))) >>> (n + 15);
    r += z3;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return s8'(r);
  endfunction

  task automatic run_pass(int w, int h, int nb, int wbase, int bgroup, pool_mode_e pool,
                          bit act, bit one_by_one, int hold_ready);
    run_layer(w, h, 8 * nb, wbase, bgroup, pool, act, one_by_one, hold_ready, 2);
  endtask

  // One pass over a w x h map with in_ch real input channels (the rest of the
  // last batch is zero); shift_n sets the requantisation shift.
  task automatic run_layer(int w, int h, int in_ch, int wbase, int bgroup, pool_mode_e pool,
                           bit act, bit one_by_one, int hold_ready, int shift_n);
    int nb = (in_ch + 7) / 8;
    int nch = 8 * nb;
    int ow, oh, nout, t0, t1, start_cyc;
    s8 act_map [];
    logic [63:0] expv [$];
    logic [31:0] r;

    // random parameters of this pass
    wts = new[8 * nch * 9];
    fmap = new[h * w * nch];
    act_map = new[h * w * 8];
    for (int f = 0; f < 8; f++)
      for (int c = 0; c < nch; c++)
        for (int k = 0; k < 9; k++)
          wts[(f * nch + c) * 9 + k] = (one_by_one && k != 4) ? s8'(0) : s8'($urandom_range(0, 80) - 40);
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++)
        for (int c = 0; c < nch; c++) fmap[(y * w + x) * nch + c] = (c < in_ch) ? s8'($urandom) : s8'(0);
    foreach (bias_all[i]) bias_all[i] = $urandom_range(0, 40000) - 20000;

    // load kernels: batch address, channel, tap
    axil_write(8'h14, 32'(wbase));
    axil_write(8'h00, {25'd0, 3'(RX_WEIGHT), 4'b0001});
    for (int a = 0; a < nb; a++)
      for (int c = 0; c < 8; c++)
        for (int k = 0; k < 9; k++) begin
          logic [63:0] d;
          for (int f = 0; f < 8; f++) d[8*f +: 8] = wts[(f * nch + 8*a + c) * 9 + k];
          send(d);
        end
    if (wbase + nb > 256) n_wrap++;
    // load biases of groups 0..3
    axil_write(8'h00, {25'd0, 3'(RX_BIAS), 4'b0001});
    for (int i = 0; i < 16; i++) send({32'(bias_all[2*i+1]), 32'(bias_all[2*i])});
    // load the activation table: slope 1/8 below zero, on a symmetric scale
    axil_write(8'h00, {25'd0, 3'(RX_LUT), 4'b0001});
    for (int i = 0; i < 256; i++) lut[i] = ($signed(8'(i)) > 0) ? s8'(i) : s8'($signed(8'(i)) >>> 3);
    for (int i = 0; i < 32; i++) begin
      logic [63:0] d;
      for (int j = 0; j < 8; j++) d[8*j +: 8] = lut[8*i + j];
      send(d);
    end

    // reference
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++)
        for (int f = 0; f < 8; f++) begin
          longint acc;
          s8 q;
          acc = bias_all[8 * bgroup + f];
          for (int dy = -1; dy <= 1; dy++)
            for (int dx = -1; dx <= 1; dx++)
              if (y + dy >= 0 && y + dy < h && x + dx >= 0 && x + dx < w && !(one_by_one && (dy != 0 || dx != 0)))
                for (int c = 0; c < in_ch; c++)
                  acc += longint'(fmap[((y+dy) * w + x+dx) * nch + c]) * longint'(wts[(f * nch + c) * 9 + (dy+1)*3 + dx + 1]);
          q = requant(acc, 23000, shift_n, -3);
          act_map[(y * w + x) * 8 + f] = act ? lut[8'(q)] : q;
        end
    case (pool)
      POOL_S2: begin ow = w / 2; oh = h / 2; end
      POOL_S1: begin ow = w - 1; oh = h - 1; end
      default: begin ow = w; oh = h; end
    endcase
    for (int y = 0; y < oh; y++)
      for (int x = 0; x < ow; x++) begin
        logic [63:0] v;
        for (int f = 0; f < 8; f++) begin
          s8 m;
          case (pool)
            POOL_S2: begin
              m = act_map[((2*y) * w + 2*x) * 8 + f];
              if (act_map[((2*y) * w + 2*x+1) * 8 + f]   > m) m = act_map[((2*y) * w + 2*x+1) * 8 + f];
              if (act_map[((2*y+1) * w + 2*x) * 8 + f]   > m) m = act_map[((2*y+1) * w + 2*x) * 8 + f];
              if (act_map[((2*y+1) * w + 2*x+1) * 8 + f] > m) m = act_map[((2*y+1) * w + 2*x+1) * 8 + f];
            end
            POOL_S1: begin
              m = act_map[(y * w + x) * 8 + f];
              if (act_map[(y * w + x+1) * 8 + f]   > m) m = act_map[(y * w + x+1) * 8 + f];
              if (act_map[((y+1) * w + x) * 8 + f]   > m) m = act_map[((y+1) * w + x) * 8 + f];
              if (act_map[((y+1) * w + x+1) * 8 + f] > m) m = act_map[((y+1) * w + x+1) * 8 + f];
            end
            default: m = act_map[(y * w + x) * 8 + f];
          endcase
          v[8*f +: 8] = m;
        end
        expv.push_back(v);
      end
    nout = oh * ow;

    // configure and run
    axil_write(8'h08, 32'(w + 2));
    axil_write(8'h0C, 32'(h + 2));
    axil_write(8'h10, 32'(nb));
    axil_write(8'h18, 32'(bgroup));
    axil_write(8'h1C, 32'd23000);
    axil_write(8'h20, 32'(shift_n));
    axil_write(8'h24, 32'hFD);          // Z3 = -3
    axil_write(8'h28, 32'(act));
    axil_write(8'h2C, 32'(pool));
    axil_write(8'h30, 32'(nout));
    outq.delete();
    lastq.delete();
    m_axis_tready = (hold_ready == 0);
    axil_write(8'h00, {25'd0, 3'(RX_FEATURE), 4'b0001});
    start_cyc = cyc;
    t0 = cyc;
    fork
      begin
        if (hold_ready > 0) begin
          repeat (hold_ready) @(posedge clk);
          #1 m_axis_tready = 1;
        end
      end
      begin
        for (int y = -1; y <= h; y++)
          for (int x = -1; x <= w; x++)
            for (int b = 0; b < nb; b++) begin
              logic [63:0] d;
              for (int c = 0; c < 8; c++)
                d[8*c +: 8] = (y < 0 || y >= h || x < 0 || x >= w) ? 8'd0 : fmap[(y * w + x) * nch + 8*b + c];
              send(d);
            end
      end
    join
    t1 = cyc;
    if (hold_ready == 0)
      chk(t1 - t0 == (h + 2) * (w + 2) * nb,
          $sformatf("rate: %0d beats took %0d clocks", (h + 2) * (w + 2) * nb, t1 - t0));
    while (outq.size() < nout && cyc - start_cyc < 200000 + 2 * (h + 2) * (w + 2) * nb) @(posedge clk);
    repeat (20) @(posedge clk);
    chk(outq.size() == nout, $sformatf("got %0d results, expected %0d", outq.size(), nout));
    for (int i = 0; i < nout && i < outq.size(); i++)
      chk(outq[i] === expv[i], $sformatf("result %0d: got %h exp %h", i, outq[i], expv[i]));
    chk(lastq.size() == 1 && lastq[0] == nout, "TLAST on the last result only");
    axil_read(8'h04, r);
    chk(r[1:0] == 2'b10 && !busy, $sformatf("status %b after pass", r[1:0]));

    if (nb > 1) n_multibatch++;
    if (pool == POOL_S2) n_pool_s2++;
    if (pool == POOL_S1) n_pool_s1++;
    if (pool == POOL_NONE) n_pool_none++;
    if (act) n_act_on++; else n_act_off++;
    if (one_by_one) n_1x1++;
  endtask

  task automatic run_upsample(int w, int h);
    logic [63:0] img [13][13];
    int got = 0, lasts = 0;
    axil_write(8'h34, 32'(w));
    axil_write(8'h38, 32'(h));
    axil_write(8'h00, {25'd0, 3'(RX_IDLE), 4'b0001});
    fork
      begin
        for (int y = 0; y < h; y++)
          for (int x = 0; x < w; x++) begin
            img[y][x] = {$urandom, $urandom};
            us_s_axis_tdata = img[y][x];
            us_s_axis_tvalid = 1;
            @(posedge clk);
            while (!us_s_axis_tready) @(posedge clk);
            #1 us_s_axis_tvalid = 0;
          end
      end
      begin
        while (got < 4 * w * h) begin
          @(posedge clk);
          if (us_m_axis_tvalid && us_m_axis_tready) begin
            int oy = got / (2 * w), ox = got % (2 * w);
            chk(us_m_axis_tdata === img[oy / 2][ox / 2], $sformatf("upsample (%0d,%0d)", oy, ox));
            if (us_m_axis_tlast) lasts++;
            got++;
          end
        end
      end
    join
    chk(lasts == 1, "upsample TLAST");
    n_upsample++;
  endtask
