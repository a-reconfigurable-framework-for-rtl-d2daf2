// accel_top_tb: end-to-end test of the accelerator core at its default sizes.
//
// A host model programs jobs over AXI4-Lite, streams feature-map and weight
// tiles over the input AXI4-Stream (with random gaps) and drains the output
// stream (with random and long back-pressure). Expected outputs come from a
// direct evaluation of each layer in the bench. The job list covers a 3x3
// convolution with ReLU over two channel groups, a stride-2 convolution whose
// weights are kept and reused by the next job, a convolution split over two
// input-channel tiles through the partial-sum buffer, max pooling, a fully
// connected layer, and an oversized tile that must raise the overflow flag.
// Jobs are queued back to back, so tiles for the next job stream in while the
// engine computes the current one.
//
// Each mechanism is counted and must occur at least once: transfer/compute
// overlap, input back-pressure (both banks full), output stall (FIFO full),
// partial-sum accumulation, weight reuse, max pooling, fully connected, overflow.
// At the end the busy-cycle counter must equal the cycle count worked out from
// the job shapes plus the observed stall cycles, and the stall-cycle counter
// the observed stalls.
module accel_top_tb;
  import accel_pkg::*;
  localparam int LANES = DEF_LANES, WORD_W = DEF_LANES * DEF_DATA_W;

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
  logic m_axis_tvalid, m_axis_tready, m_axis_tlast;
  logic [WORD_W-1:0] m_axis_tdata;
  logic irq;

  accel_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ mechanisms
  int n_overlap = 0, n_backpressure = 0, n_out_stall = 0, n_psum = 0, n_reuse = 0;
  int n_pool = 0, n_fc = 0, n_overflow = 0, n_irq = 0, n_out = 0;
  always @(posedge clk) if (rst_n) begin
    if (s_axis_tvalid && s_axis_tready && dut.eng_busy) n_overlap++;
    if (s_axis_tvalid && !s_axis_tready) n_backpressure++;
    if (dut.eng_stall) n_out_stall++;
    if (dut.act_overflow) n_overflow++;
    if (irq) n_irq++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------- AXI4-Lite
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

  task automatic reg_read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axil_araddr = a; s_axil_arvalid = 1;
    #1;
    while (!s_axil_arready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_axil_arvalid = 0; s_axil_rready = 1;
    #1;
    while (!s_axil_rvalid) begin @(negedge clk); #1; end
    d = s_axil_rdata;
    @(negedge clk);
    s_axil_rready = 0;
  endtask

  // ---------------------------------------------------------- input stream
  // Tiles are queued and sent in order by one streaming process, so the host
  // can run ahead of the engine by up to two tiles per buffer.
  typedef struct { logic [WORD_W-1:0] words [$]; bit dest; } tile_t;
  tile_t tiles [$];
  initial forever begin
    tile_t t;
    while (tiles.size() == 0) @(negedge clk);
    t = tiles.pop_front();
    send_words(t.words, t.dest);
  end

  task automatic send_words(logic [WORD_W-1:0] words [$], bit dest);
    foreach (words[i]) begin
      @(negedge clk);
      while ($urandom % 5 == 0) @(negedge clk);   // random gaps
      s_axis_tvalid = 1; s_axis_tdata = words[i]; s_axis_tdest = dest;
      s_axis_tlast = (i == words.size() - 1);
      #1;
      while (!s_axis_tready) begin @(negedge clk); #1; end
      @(posedge clk);
      #1;
      s_axis_tvalid = 0; s_axis_tlast = 0;
    end
  endtask

  task automatic queue_tile(logic [WORD_W-1:0] words [$], bit dest);
    tile_t t;
    t.words = words;
    t.dest = dest;
    tiles.push_back(t);
  endtask

  // --------------------------------------------------------- output stream
  logic [WORD_W-1:0] exp_q [$];
  bit exp_last_q [$];
  int hold_low = 0;
  int n_starts = 0;
  always @(posedge clk) if (rst_n && dut.eng_start) n_starts++;
  always @(negedge clk) begin
    if (hold_low > 0) begin
      m_axis_tready <= 0;
      hold_low <= hold_low - 1;
    end else if (dut.eng_start && (n_starts == 0 || $urandom % 2 == 0)) begin
      hold_low <= 700;                          // long back-pressure as a job begins
      m_axis_tready <= 0;
    end else begin
      m_axis_tready <= ($urandom % 3) != 0;
    end
  end
  always @(posedge clk) if (rst_n && m_axis_tvalid && m_axis_tready) begin
    n_out++;
    checks++;
    if (exp_q.size() == 0) begin
      failures++;
      $display("unexpected output word %h", m_axis_tdata);
    end else begin
      logic [WORD_W-1:0] e;
      bit el;
      e = exp_q.pop_front();
      el = exp_last_q.pop_front();
      if (m_axis_tdata !== e || m_axis_tlast !== el) begin
        failures++;
        if (failures < 10) $display("output %0d: got %h/%0b expected %h/%0b", n_out, m_axis_tdata, m_axis_tlast, e, el);
      end
    end
  end

  // ------------------------------------------------------ reference model
  typedef byte wvec_t [LANES];
  function automatic void ref_layer(layer_cfg_t c, byte a [], wvec_t w [], ref longint raw [][LANES]);
    int oh, ow;
    oh = (int'(c.in_h) - int'(c.k_h)) / int'(c.stride) + 1;
    ow = (int'(c.in_w) - int'(c.k_w)) / int'(c.stride) + 1;
    raw = new[int'(c.groups) * oh * ow];
    foreach (raw[p, l]) raw[p][l] = (c.mode == MODE_MAXPOOL) ? -1000 : 0;
    for (int g = 0; g < int'(c.groups); g++)
      for (int oy = 0; oy < oh; oy++)
        for (int ox = 0; ox < ow; ox++)
          for (int ky = 0; ky < int'(c.k_h); ky++)
            for (int kx = 0; kx < int'(c.k_w); kx++)
              for (int ci = 0; ci < ((c.mode == MODE_MAXPOOL) ? 1 : int'(c.in_c)); ci++)
                for (int l = 0; l < LANES; l++) begin
                  int p, y, x, ai, wi;
                  longint av, wv;
                  p = (g * oh + oy) * ow + ox;
                  y = oy * int'(c.stride) + ky;
                  x = ox * int'(c.stride) + kx;
                  if (c.mode == MODE_MAXPOOL) begin
                    ai = (y * int'(c.in_w) + x) * int'(c.in_c) + g * LANES + l;
                    av = a[ai];
                    if (av > raw[p][l]) raw[p][l] = av;
                  end else begin
                    ai = (y * int'(c.in_w) + x) * int'(c.in_c) + ci;
                    wi = ((g * int'(c.k_h) + ky) * int'(c.k_w) + kx) * int'(c.in_c) + ci;
                    av = a[ai];
                    wv = w[wi][l];
                    raw[p][l] += av * wv;
                  end
                end
  endfunction

  function automatic void expect_q(layer_cfg_t c, longint raw [][LANES]);
    for (int p = 0; p < raw.size(); p++) begin
      logic [WORD_W-1:0] word;
      for (int l = 0; l < LANES; l++) begin
        longint v;
        v = raw[p][l];
        if (c.relu && v < 0) v = 0;
        if (c.shift > 0) v = (v + (longint'(1) << (c.shift - 1))) >>> c.shift;
        if (v > 127) v = 127;
        if (v < -128) v = -128;
        word[l*8 +: 8] = 8'(v);
      end
      exp_q.push_back(word);
      exp_last_q.push_back(p == raw.size() - 1);
    end
  endfunction

  function automatic void rand_act(ref byte a [], input int n);
    a = new[n];
    foreach (a[i]) a[i] = byte'($urandom);
  endfunction
  function automatic void rand_wgt(ref wvec_t w [], input int n);
    w = new[n];
    foreach (w[i, l]) w[i][l] = byte'($urandom);
  endfunction
  function automatic void pack_act(byte a [], ref logic [WORD_W-1:0] q [$]);
    q = {};
    for (int i = 0; i < (a.size() + LANES - 1) / LANES; i++) begin
      logic [WORD_W-1:0] word;
      word = '0;
      for (int b = 0; b < LANES; b++) if (i * LANES + b < a.size()) word[b*8 +: 8] = a[i * LANES + b];
      q.push_back(word);
    end
  endfunction
  function automatic void pack_wgt(wvec_t w [], ref logic [WORD_W-1:0] q [$]);
    q = {};
    foreach (w[i]) begin
      logic [WORD_W-1:0] word;
      for (int l = 0; l < LANES; l++) word[l*8 +: 8] = w[i][l];
      q.push_back(word);
    end
  endfunction

  function automatic layer_cfg_t mk(mode_e m, int in_c, int h, int w, int k_h, int k_w, int s,
                                    int groups, bit relu, int shift, bit first, bit last, bit keep);
    layer_cfg_t c;
    c = '0;
    c.mode = m; c.in_c = CH_W'(in_c); c.in_h = DIM_W'(h); c.in_w = DIM_W'(w);
    c.k_h = K_W'(k_h); c.k_w = K_W'(k_w); c.stride = STRIDE_W'(s); c.groups = GRP_W'(groups);
    c.relu = relu; c.shift = SHIFT_W'(shift); c.first_ci = first; c.last_ci = last; c.keep_wgt = keep;
    return c;
  endfunction

  // Program a job and request it, after the previous request has been taken.
  // Engine busy cycles of a job: two set-up cycles, W per output pixel, three
  // cycles to drain (two when the job only stores partial sums), one done
  // cycle; stalls are counted separately.
  longint exp_busy = 0;
  function automatic int busy_cycles(layer_cfg_t c);
    int oh, ow, w;
    bit stored;
    oh = (int'(c.in_h) - int'(c.k_h)) / int'(c.stride) + 1;
    ow = (int'(c.in_w) - int'(c.k_w)) / int'(c.stride) + 1;
    w = int'(c.k_h) * int'(c.k_w) * ((c.mode == MODE_CONV) ? int'(c.in_c) : 1);
    stored = (c.mode == MODE_CONV) && !c.last_ci;
    return (stored ? 5 : 6) + int'(c.groups) * oh * ow * w;
  endfunction

  task automatic submit(layer_cfg_t c);
    logic [31:0] st;
    exp_busy += busy_cycles(c);
    do reg_read(REG_STATUS, st); while (st[1]);
    reg_write(REG_CH, 32'(c.in_c));
    reg_write(REG_DIM, {6'd0, c.in_w, 6'd0, c.in_h});
    reg_write(REG_KERN, {13'd0, c.stride, 4'd0, c.k_w, 4'd0, c.k_h});
    reg_write(REG_GROUPS, 32'(c.groups));
    reg_write(REG_FLAGS, {19'd0, c.shift, 3'd0, c.keep_wgt, c.last_ci, c.first_ci, c.relu, c.mode});
    reg_write(REG_CTRL, 32'd1);
  endtask

  task automatic run(layer_cfg_t c, byte a [], wvec_t w [], bit send_w);
    logic [WORD_W-1:0] qa [$], qw [$];
    $display("[%0t] job: mode %0d in_c %0d, jobs done %0d", $time, c.mode, c.in_c, dut.jobs_done);
    pack_act(a, qa);
    pack_wgt(w, qw);
    if (send_w) queue_tile(qw, 1'b1);
    queue_tile(qa, 1'b0);
    submit(c);
  endtask

  initial begin
    byte a1 [], a2 [], a3 [], a4 [], a5 [], a6 [], af [], ah [];
    wvec_t w1 [], w2 [], w4 [], w6 [], wf [], wh [];
    longint raw [][LANES], raw2 [][LANES];
    layer_cfg_t c1, c2, c3, c4a, c4b, c4, c5, c6, c7;
    logic [31:0] st;
    int jobs;

    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1: 3x3 convolution, 3 -> 16 channels, ReLU
    c1 = mk(MODE_CONV, 3, 8, 8, 3, 3, 1, 2, 1, 9, 1, 1, 0);
    rand_act(a1, 3 * 8 * 8); rand_wgt(w1, 2 * 9 * 3);
    ref_layer(c1, a1, w1, raw); expect_q(c1, raw);
    run(c1, a1, w1, 1);

    // 2: stride-2 convolution, weights kept for job 3
    c2 = mk(MODE_CONV, 8, 9, 9, 3, 3, 2, 1, 0, 10, 1, 1, 1);
    rand_act(a2, 8 * 9 * 9); rand_wgt(w2, 9 * 8);
    ref_layer(c2, a2, w2, raw); expect_q(c2, raw);
    run(c2, a2, w2, 1);

    // 3: same weights, new tile, no weight transfer
    c3 = mk(MODE_CONV, 8, 9, 9, 3, 3, 2, 1, 1, 10, 1, 1, 0);
    rand_act(a3, 8 * 9 * 9);
    ref_layer(c3, a3, w2, raw); expect_q(c3, raw);
    run(c3, a3, w2, 0);
    n_reuse++;

    // 4: 16-channel 3x3 convolution split into two 8-channel tiles
    c4 = mk(MODE_CONV, 16, 5, 5, 3, 3, 1, 2, 1, 10, 1, 1, 0);
    rand_act(a4, 16 * 5 * 5); rand_wgt(w4, 2 * 9 * 16);
    ref_layer(c4, a4, w4, raw); expect_q(c4, raw);
    for (int h = 0; h < 2; h++) begin
      layer_cfg_t ch;
      ch = mk(MODE_CONV, 8, 5, 5, 3, 3, 1, 2, 1, 10, h == 0, h == 1, 0);
      ah = new[8 * 5 * 5];
      foreach (ah[i]) ah[i] = a4[(i / 8) * 16 + h * 8 + i % 8];
      wh = new[2 * 9 * 8];
      foreach (wh[i]) wh[i] = w4[(i / 8) * 16 + h * 8 + i % 8];
      run(ch, ah, wh, 1);
      if (h == 1) n_psum++;
    end

    // 5: 2x2 max pooling, stride 2, 16 channels
    c5 = mk(MODE_MAXPOOL, 16, 8, 8, 2, 2, 2, 2, 0, 0, 1, 1, 0);
    rand_act(a5, 16 * 8 * 8);
    ref_layer(c5, a5, w1, raw); expect_q(c5, raw);
    run(c5, a5, w1, 0);
    n_pool++;

    // 6: fully connected, 4x4x8 input -> 24 outputs
    c6 = mk(MODE_CONV, 8, 4, 4, 4, 4, 1, 3, 0, 10, 1, 1, 0);
    rand_act(a6, 8 * 4 * 4); rand_wgt(w6, 3 * 16 * 8);
    ref_layer(c6, a6, w6, raw); expect_q(c6, raw);
    run(c6, a6, w6, 1);
    n_fc++;

    // 7: a tile larger than a bank raises overflow; the first words are kept
    c7 = mk(MODE_MAXPOOL, 8, 2, 2, 2, 2, 1, 1, 0, 0, 1, 1, 0);
    rand_act(af, (DEF_ACT_DEPTH + 4) * LANES);
    ref_layer(c7, af, w1, raw); expect_q(c7, raw);
    run(c7, af, w1, 0);

    // wait for everything to drain
    jobs = 8;
    do reg_read(REG_JOBS, st); while (st < 32'(jobs));
    check(tiles.size() == 0, "all tiles sent");
    while (exp_q.size() != 0) @(negedge clk);
    repeat (20) @(negedge clk);

    reg_read(REG_STATUS, st);
    check(st[2], "overflow flag set by the oversized tile");
    check(st[31:16] == 16'(jobs) && n_irq == jobs, "job counter and irq count");
    check(st[4:3] == 2'b00 && !st[0] && !st[1], "idle with no full bank at the end");
    reg_write(REG_JOBS, 32'd0);
    reg_read(REG_STATUS, st);
    check(!st[2], "overflow flag cleared");
    reg_read(REG_BUSYCYC, st);
    check(st == 32'(exp_busy + n_out_stall), $sformatf("busy cycle counter %0d, expected %0d", st, exp_busy + n_out_stall));
    reg_read(REG_STALLCYC, st);
    check(st == 32'(n_out_stall), $sformatf("stall cycle counter %0d, expected %0d", st, n_out_stall));

    $display("outputs %0d; overlap %0d, back-pressure %0d, output stall %0d cycles; psum %0d, reuse %0d, pool %0d, fc %0d, overflow %0d",
             n_out, n_overlap, n_backpressure, n_out_stall, n_psum, n_reuse, n_pool, n_fc, n_overflow);
    check(n_overlap > 0, "transfer overlapped with computation");
    check(n_backpressure > 0, "input back-pressure");
    check(n_out_stall > 0, "output stall");
    check(n_psum > 0 && n_reuse > 0 && n_pool > 0 && n_fc > 0, "job kinds");
    check(n_overflow > 0, "overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
