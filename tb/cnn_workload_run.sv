// cnn_workload_run: a small ResNet-like image classifier run through the core,
// for a given data width. It is the body of cnn_workload_tb (INT8, the
// default width) and cnn_workload_int16_tb (16-bit data, the wider option).
//
// The bench plays the host. For each image it runs these steps:
//   conv1  3x3, pad 1, 3 -> 16 channels, ReLU              (core)
//   conv2  3x3, pad 1, 16 -> 16 channels, ReLU             (core)
//   residual add conv1 + conv2, saturate                   (host)
//   pool   2x2 max, stride 2: 32x32 -> 16x16               (core)
//   conv3  3x3, pad 1, stride 2, 16 -> 32 channels, ReLU   (core)
//   global average pooling 8x8 -> 32 values                (host)
//   fc     32 -> 10 classes                                (core, as a 1x1 convolution)
// on 32x32x3 input images with random weights. The host pads each tile,
// packs it in the core's layouts, streams it, and unpacks the outputs. A
// reference network in the bench computes every layer on plain arrays, with
// padding as bounds checks rather than padded copies. It must agree with the
// core on every activation of every layer and on the ten class scores of
// every image. The cycles spent per image are reported. Value ranges and
// shifts are chosen per width so that no 32-bit accumulator can overflow and
// the activations stay mostly unsaturated.
//
// Interface: DW sets the core's DATA_W, LN its LANES, IMAGES the number of
// images. The
// module raises done when finished and reports checks and failures; the
// wrapper prints the result line and holds the watchdog.
module cnn_workload_run #(
  parameter int DW = 8,
  parameter int LN = 8,
  parameter int IMAGES = 2
) (
  output int checks,
  output int failures,
  output bit done
);
  import accel_pkg::*;
  localparam int LANES = LN, WORD_W = LN * DW;
  localparam longint QMAX = (longint'(1) << (DW - 1)) - 1;
  localparam longint QMIN = -(longint'(1) << (DW - 1));
  localparam bit WIDE = DW > 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0] s_axil_awaddr = '0, s_axil_araddr = '0;
  logic s_axil_awvalid = 0, s_axil_awready, s_axil_wvalid = 0, s_axil_wready;
  logic [31:0] s_axil_wdata = '0, s_axil_rdata;
  logic [3:0] s_axil_wstrb = 4'hF;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic s_axil_bvalid, s_axil_bready = 0, s_axil_arvalid = 0, s_axil_arready;
  logic s_axil_rvalid, s_axil_rready = 0;
  logic s_axis_tvalid = 0, s_axis_tready, s_axis_tlast = 0, s_axis_tdest = 0;
  logic [WORD_W-1:0] s_axis_tdata = '0;
  logic m_axis_tvalid, m_axis_tready = 1, m_axis_tlast;
  logic [WORD_W-1:0] m_axis_tdata;
  logic irq;

  accel_top #(.LANES(LN), .DATA_W(DW)) dut (.*);

  initial begin checks = 0; failures = 0; done = 0; end
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;


  // -------------------------------------------------------- host interface
  task automatic reg_write(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_awvalid = 1; s_axil_wdata = d; s_axil_wvalid = 1;
    #1;
    while (!(s_axil_awready && s_axil_wready)) begin @(negedge clk); #1; end
    @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 1;
    #1;
    while (!s_axil_bvalid) begin @(negedge clk); #1; end
    @(negedge clk);
    s_axil_bready = 0;
  endtask

  task automatic send_words(logic [WORD_W-1:0] words [$], bit dest);
    foreach (words[i]) begin
      @(negedge clk);
      s_axis_tvalid = 1; s_axis_tdata = words[i]; s_axis_tdest = dest;
      s_axis_tlast = (i == words.size() - 1);
      #1;
      while (!s_axis_tready) begin @(negedge clk); #1; end
      @(posedge clk);
      #1;
      s_axis_tvalid = 0; s_axis_tlast = 0;
    end
  endtask

  logic [WORD_W-1:0] outq [$];
  always @(posedge clk) if (rst_n && m_axis_tvalid && m_axis_tready) outq.push_back(m_axis_tdata);

  // An activation tensor, height-width-channel, as a flat array of int8 values.
  typedef struct { int h, w, c; int v []; } tensor_t;

  function automatic int satq(longint v);
    if (v > QMAX) return int'(QMAX);
    if (v < QMIN) return int'(QMIN);
    return int'(v);
  endfunction

  function automatic int requant(longint s, bit relu, int shift);
    if (relu && s < 0) s = 0;
    if (shift > 0) s = (s + (longint'(1) << (shift - 1))) >>> shift;
    return satq(s);
  endfunction

  // Run one layer on the core: pad, pack, stream, start, collect, unpack.
  // wts is [cout][k][k][cin] flattened; for pooling it is unused.
  task automatic hw_layer(input tensor_t x, input mode_e mode, input int pad, input int k, input int stride,
                          input int wts [], input int cout, input bit relu, input int shift,
                          output tensor_t y);
    int ph, pw, groups, oh, ow, nw;
    int t [];
    logic [WORD_W-1:0] qa [$], qw [$];
    layer_cfg_t c;
    ph = x.h + 2 * pad; pw = x.w + 2 * pad;
    groups = (mode == MODE_MAXPOOL) ? x.c / LANES : (cout + LANES - 1) / LANES;
    oh = (ph - k) / stride + 1; ow = (pw - k) / stride + 1;
    t = new[ph * pw * x.c];
    foreach (t[i]) t[i] = 0;
    for (int yy = 0; yy < x.h; yy++)
      for (int xx = 0; xx < x.w; xx++)
        for (int ci = 0; ci < x.c; ci++)
          t[((yy + pad) * pw + xx + pad) * x.c + ci] = x.v[(yy * x.w + xx) * x.c + ci];
    for (int i = 0; i < (t.size() + LANES - 1) / LANES; i++) begin
      logic [WORD_W-1:0] word;
      word = '0;
      for (int b = 0; b < LANES; b++) if (i * LANES + b < t.size()) word[b*DW +: DW] = DW'(t[i * LANES + b]);
      qa.push_back(word);
    end
    if (mode == MODE_CONV) begin
      for (int g = 0; g < groups; g++)
        for (int ky = 0; ky < k; ky++)
          for (int kx = 0; kx < k; kx++)
            for (int ci = 0; ci < x.c; ci++) begin
              logic [WORD_W-1:0] word;
              word = '0;
              for (int l = 0; l < LANES; l++)
                if (g * LANES + l < cout) word[l*DW +: DW] = DW'(wts[(((g * LANES + l) * k + ky) * k + kx) * x.c + ci]);
              qw.push_back(word);
            end
    end
    c = '0;
    c.mode = mode; c.in_c = CH_W'(x.c); c.in_h = DIM_W'(ph); c.in_w = DIM_W'(pw);
    c.k_h = K_W'(k); c.k_w = K_W'(k); c.stride = STRIDE_W'(stride); c.groups = GRP_W'(groups);
    c.relu = relu; c.shift = SHIFT_W'(shift); c.first_ci = 1; c.last_ci = 1;
    reg_write(REG_CH, 32'(c.in_c));
    reg_write(REG_DIM, {6'd0, c.in_w, 6'd0, c.in_h});
    reg_write(REG_KERN, {13'd0, c.stride, 4'd0, c.k_w, 4'd0, c.k_h});
    reg_write(REG_GROUPS, 32'(c.groups));
    reg_write(REG_FLAGS, {19'd0, c.shift, 3'd0, c.keep_wgt, c.last_ci, c.first_ci, c.relu, c.mode});
    reg_write(REG_CTRL, 32'd1);
    if (mode == MODE_CONV) send_words(qw, 1'b1);
    send_words(qa, 1'b0);
    nw = groups * oh * ow;
    while (outq.size() < nw) @(negedge clk);
    y.h = oh; y.w = ow; y.c = (mode == MODE_MAXPOOL) ? x.c : cout;
    y.v = new[oh * ow * y.c];
    for (int g = 0; g < groups; g++)
      for (int p = 0; p < oh * ow; p++) begin
        logic [WORD_W-1:0] word;
        word = outq.pop_front();
        for (int l = 0; l < LANES; l++)
          if (g * LANES + l < y.c) y.v[p * y.c + g * LANES + l] = int'($signed(word[l*DW +: DW]));
      end
  endtask

  // Reference layer on plain arrays, padding by bounds checks.
  function automatic tensor_t ref_conv(tensor_t x, int pad, int k, int stride, int wts [], int cout,
                                       bit relu, int shift);
    tensor_t y;
    y.h = (x.h + 2 * pad - k) / stride + 1; y.w = (x.w + 2 * pad - k) / stride + 1; y.c = cout;
    y.v = new[y.h * y.w * cout];
    for (int oy = 0; oy < y.h; oy++)
      for (int ox = 0; ox < y.w; ox++)
        for (int co = 0; co < cout; co++) begin
          longint s;
          s = 0;
          for (int ky = 0; ky < k; ky++)
            for (int kx = 0; kx < k; kx++) begin
              int iy, ix;
              iy = oy * stride + ky - pad; ix = ox * stride + kx - pad;
              if (iy >= 0 && iy < x.h && ix >= 0 && ix < x.w)
                for (int ci = 0; ci < x.c; ci++) begin
                  longint a, w;
                  a = longint'(x.v[(iy * x.w + ix) * x.c + ci]);
                  w = longint'(wts[((co * k + ky) * k + kx) * x.c + ci]);
                  s += a * w;
                end
            end
          y.v[(oy * y.w + ox) * cout + co] = requant(s, relu, shift);
        end
    return y;
  endfunction

  function automatic tensor_t ref_maxpool(tensor_t x, int k, int stride);
    tensor_t y;
    y.h = (x.h - k) / stride + 1; y.w = (x.w - k) / stride + 1; y.c = x.c;
    y.v = new[y.h * y.w * y.c];
    for (int oy = 0; oy < y.h; oy++)
      for (int ox = 0; ox < y.w; ox++)
        for (int ch = 0; ch < x.c; ch++) begin
          int m;
          m = int'(QMIN);
          for (int ky = 0; ky < k; ky++)
            for (int kx = 0; kx < k; kx++)
              if (x.v[((oy * stride + ky) * x.w + ox * stride + kx) * x.c + ch] > m)
                m = x.v[((oy * stride + ky) * x.w + ox * stride + kx) * x.c + ch];
          y.v[(oy * y.w + ox) * y.c + ch] = m;
        end
    return y;
  endfunction

  // host-side (CPU) layers, used for both paths
  function automatic tensor_t add_sat(tensor_t a, tensor_t b);
    tensor_t y;
    y = a;
    foreach (y.v[i]) y.v[i] = satq(longint'(a.v[i]) + longint'(b.v[i]));
    return y;
  endfunction

  function automatic tensor_t global_avg(tensor_t x);
    tensor_t y;
    y.h = 1; y.w = 1; y.c = x.c;
    y.v = new[x.c];
    for (int ch = 0; ch < x.c; ch++) begin
      longint s;
      s = 0;
      for (int p = 0; p < x.h * x.w; p++) s += longint'(x.v[p * x.c + ch]);
      y.v[ch] = satq(s / (x.h * x.w));
    end
    return y;
  endfunction

  function automatic void rand_vals(ref int v [], input int n, input int range);
    v = new[n];
    foreach (v[i]) v[i] = int'($urandom % (2 * range + 1)) - range;
  endfunction

  function automatic void compare(string what, tensor_t got, tensor_t expd);
    int bad;
    bad = 0;
    checks++;
    if (got.h != expd.h || got.w != expd.w || got.c != expd.c || got.v.size() != expd.v.size()) begin
      failures++;
      $display("%s: shape %0dx%0dx%0d, expected %0dx%0dx%0d", what, got.h, got.w, got.c, expd.h, expd.w, expd.c);
      return;
    end
    foreach (got.v[i]) if (got.v[i] != expd.v[i]) bad++;
    if (bad != 0) begin
      failures++;
      $display("%s: %0d of %0d values differ", what, bad, got.v.size());
    end
  endfunction

  initial begin
    int w1 [], w2 [], w3 [], w4 [];
    tensor_t img, h1, h2, r, p, h3, g, s_hw;
    tensor_t e1, e2, er, ep, e3, eg, s_ref;
    longint unsigned t0;
    int wr1, wr2, sh1, sh2, sh3, sh4;
    // ranges and shifts: 8-bit / wider
    wr1 = WIDE ? 300 : 60;  wr2 = WIDE ? 300 : 40;
    sh1 = WIDE ? 10 : 7;    sh2 = WIDE ? 11 : 10;   sh3 = WIDE ? 11 : 10;  sh4 = WIDE ? 10 : 6;
    rand_vals(w1, 16 * 9 * 3, wr1);
    rand_vals(w2, 16 * 9 * 16, wr2);
    rand_vals(w3, 32 * 9 * 16, wr2);
    rand_vals(w4, 10 * 1 * 32, wr1);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < IMAGES; n++) begin
      img.h = 32; img.w = 32; img.c = 3;
      rand_vals(img.v, 32 * 32 * 3, int'(QMAX));
      t0 = cyc;
      hw_layer(img, MODE_CONV, 1, 3, 1, w1, 16, 1, sh1, h1);
      hw_layer(h1, MODE_CONV, 1, 3, 1, w2, 16, 1, sh2, h2);
      r = add_sat(h1, h2);
      hw_layer(r, MODE_MAXPOOL, 0, 2, 2, w1, 0, 0, 0, p);
      hw_layer(p, MODE_CONV, 1, 3, 2, w3, 32, 1, sh3, h3);
      g = global_avg(h3);
      hw_layer(g, MODE_CONV, 0, 1, 1, w4, 10, 0, sh4, s_hw);
      $display("image %0d: %0d cycles through the core and host model", n, cyc - t0);

      e1 = ref_conv(img, 1, 3, 1, w1, 16, 1, sh1);
      e2 = ref_conv(e1, 1, 3, 1, w2, 16, 1, sh2);
      er = add_sat(e1, e2);
      ep = ref_maxpool(er, 2, 2);
      e3 = ref_conv(ep, 1, 3, 2, w3, 32, 1, sh3);
      eg = global_avg(e3);
      s_ref = ref_conv(eg, 0, 1, 1, w4, 10, 0, sh4);
      compare("conv1", h1, e1);
      compare("conv2", h2, e2);
      compare("pool", p, ep);
      compare("conv3", h3, e3);
      compare("fc", s_hw, s_ref);
      begin
        int nz, ns;
        nz = 0;
        ns = 0;
        foreach (e3.v[i]) begin
          if (e3.v[i] != 0) nz++;
          if (longint'(e3.v[i]) == QMAX) ns++;
        end
        checks++;
        if (nz < e3.v.size() / 8 || ns > e3.v.size() / 4) begin
          failures++;
          $display("conv3 test data too weak: %0d nonzero, %0d saturated of %0d", nz, ns, e3.v.size());
        end
      end
      $write("image %0d class scores:", n);
      foreach (s_hw.v[i]) $write(" %0d", s_hw.v[i]);
      $write("\n");
    end
    done = 1;
  end
endmodule
