// layer_engine_tb: self-checking test of the layer engine.
//
// The engine reads two behavioural memories with one cycle of read latency. For
// each job the bench fills them with random 8-bit data, computes the expected
// outputs directly from the definition of the layer (a plain loop over output
// pixels, kernel positions and channels), and compares them word by word with
// what the engine emits while the output port's ready signal is toggled at
// random and held low for long stretches (300 of every 500 cycles). Jobs: convolutions with an odd channel count, stride 1 and 2, a fully
// connected layer, a convolution split over two input-channel tiles through the
// partial-sum buffer, max pooling, and one-cycle windows (a 1x1 convolution
// accumulated over three tiles, and 1x1 pooling) that issue back to back. The cycle count of every job is checked
// against 7 + sum over pixels of W (6 + ... when the job only stores partial
// sums) plus the cycles the engine waited for a result-queue slot, measured
// from the cycle before `start` is taken.
module layer_engine_tb;
  import accel_pkg::*;

  localparam int LANES = 8, DATA_W = 8, ACC_W = 32;
  localparam int ACT_DEPTH = 1024, WGT_DEPTH = 1024, PSUM_DEPTH = 256;
  localparam int WORD_W = LANES * DATA_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  layer_cfg_t cfg;
  logic busy, done, act_rd_en, wgt_rd_en, out_valid, out_ready, out_last, stall;
  logic [$clog2(ACT_DEPTH)-1:0] act_rd_addr;
  logic [$clog2(WGT_DEPTH)-1:0] wgt_rd_addr;
  logic [WORD_W-1:0] act_rd_data, wgt_rd_data, out_data;

  logic [WORD_W-1:0] act_mem [ACT_DEPTH];
  logic [WORD_W-1:0] wgt_mem [WGT_DEPTH];
  always_ff @(posedge clk) begin
    if (act_rd_en) act_rd_data <= act_mem[act_rd_addr];
    if (wgt_rd_en) wgt_rd_data <= wgt_mem[wgt_rd_addr];
  end

  layer_engine #(.LANES(LANES), .DATA_W(DATA_W), .ACC_W(ACC_W), .ACT_DEPTH(ACT_DEPTH),
                 .WGT_DEPTH(WGT_DEPTH), .PSUM_DEPTH(PSUM_DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  int stall_cycles = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && stall) stall_cycles <= stall_cycles + 1;
  end

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // test data
  byte abytes [];      // feature-map tile, HWC
  byte wts [][LANES];  // one entry per weight word
  longint raw [][LANES];
  logic [WORD_W-1:0] exp_q [$];
  bit exp_last_q [$];

  function automatic void fill_mems(int in_c, int in_h, int in_w, int nwords);
    abytes = new[in_c * in_h * in_w];
    foreach (abytes[i]) abytes[i] = byte'($urandom);
    wts = new[nwords];
    foreach (wts[i, l]) wts[i][l] = byte'($urandom);
    for (int i = 0; i < ACT_DEPTH; i++) act_mem[i] = '0;
    foreach (abytes[i]) act_mem[i / LANES][(i % LANES)*8 +: 8] = abytes[i];
    foreach (wts[i, l]) wgt_mem[i][l*8 +: 8] = wts[i][l];
  endfunction

  // Sums of one job, straight from the definition of the layer.
  function automatic void ref_sums(layer_cfg_t c, bit accumulate);
    int oh = (int'(c.in_h) - int'(c.k_h)) / int'(c.stride) + 1;
    int ow = (int'(c.in_w) - int'(c.k_w)) / int'(c.stride) + 1;
    int n = int'(c.groups) * oh * ow;
    if (!accumulate) begin
      raw = new[n];
      foreach (raw[i, l]) raw[i][l] = (c.mode == MODE_MAXPOOL) ? -1000 : 0;
    end
    for (int g = 0; g < int'(c.groups); g++)
      for (int oy = 0; oy < oh; oy++)
        for (int ox = 0; ox < ow; ox++) begin
          int p = (g * oh + oy) * ow + ox;
          for (int ky = 0; ky < int'(c.k_h); ky++)
            for (int kx = 0; kx < int'(c.k_w); kx++) begin
              int y = oy * int'(c.stride) + ky, x = ox * int'(c.stride) + kx;
              if (c.mode == MODE_MAXPOOL) begin
                for (int l = 0; l < LANES; l++) begin
                  int ai = (y * int'(c.in_w) + x) * int'(c.in_c) + g * LANES + l;
                  longint v = abytes[ai];
                  if (v > raw[p][l]) raw[p][l] = v;
                end
              end else begin
                for (int ci = 0; ci < int'(c.in_c); ci++) begin
                  int ai = (y * int'(c.in_w) + x) * int'(c.in_c) + ci;
                  int wi = ((g * int'(c.k_h) + ky) * int'(c.k_w) + kx) * int'(c.in_c) + ci;
                  for (int l = 0; l < LANES; l++) begin
                    longint av = abytes[ai];
                    longint wv = wts[wi][l];
                    raw[p][l] += av * wv;
                  end
                end
              end
            end
        end
  endfunction

  function automatic byte quant(longint v, bit relu, int shift);
    if (relu && v < 0) v = 0;
    if (shift > 0) v = (v + (longint'(1) << (shift - 1))) >>> shift;
    if (v > 127) return 127;
    if (v < -128) return -128;
    return byte'(v);
  endfunction

  function automatic void expect_outputs(layer_cfg_t c);
    for (int p = 0; p < raw.size(); p++) begin
      logic [WORD_W-1:0] w;
      w = '0;
      for (int l = 0; l < LANES; l++) begin
        byte q;
        q = quant(raw[p][l], c.relu, int'(c.shift));
        w[l*8 +: 8] = q;
      end
      exp_q.push_back(w);
      exp_last_q.push_back(p == raw.size() - 1);
    end
  endfunction

  function automatic int expected_cycles(layer_cfg_t c, int stalls);
    int oh = (int'(c.in_h) - int'(c.k_h)) / int'(c.stride) + 1;
    int ow = (int'(c.in_w) - int'(c.k_w)) / int'(c.stride) + 1;
    int w = int'(c.k_h) * int'(c.k_w) * ((c.mode == MODE_CONV) ? int'(c.in_c) : 1);
    bit stored = (c.mode == MODE_CONV) && !c.last_ci;
    return 6 + int'(c.groups) * oh * ow * w + (stored ? 0 : 1) + stalls;
  endfunction

  // output checker with random back-pressure
  int outs_seen = 0;
  // ready is low for 300 of every 500 cycles, so the result queue fills and
  // the engine must wait, and random otherwise
  always @(negedge clk) out_ready <= (cyc % 500 >= 300) && ($urandom % 4 != 0);
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      outs_seen++;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected output %h", out_data);
      end else begin
        logic [WORD_W-1:0] e;
        bit el;
        e  = exp_q.pop_front();
        el = exp_last_q.pop_front();
        if (out_data !== e || out_last !== el) begin
          failures++;
          $display("output mismatch: got %h last %0b, expected %h last %0b", out_data, out_last, e, el);
        end
      end
    end
  end

  task automatic run_job(layer_cfg_t c, bit check_all = 1);
    int t0, s0;
    @(negedge clk);
    cfg = c; start = 1; t0 = int'(cyc); s0 = stall_cycles;
    @(negedge clk);
    start = 0;
    cfg = '0;  // the engine must have latched its configuration
    while (!done) @(negedge clk);
    $display("job mode %0d in_c %0d done, failures so far %0d", c.mode, c.in_c, failures);
    checks++;
    if (int'(cyc) - t0 != expected_cycles(c, stall_cycles - s0)) begin
      failures++;
      $display("job cycles %0d, expected %0d", int'(cyc) - t0, expected_cycles(c, stall_cycles - s0));
    end
    // the last words may still be queued after done
    for (int i = 0; i < 1000 && exp_q.size() != 0; i++) @(negedge clk);
    if (check_all) checks++;
    if (check_all && exp_q.size() != 0) begin
      failures++;
      $display("%0d outputs missing", exp_q.size());
      exp_q.delete(); exp_last_q.delete();
    end
  endtask

  function automatic layer_cfg_t mk(mode_e m, int in_c, int h, int w, int k_h, int k_w, int s,
                                    int groups, bit relu, int shift, bit first, bit last);
    layer_cfg_t c = '0;
    c.mode = m; c.in_c = CH_W'(in_c); c.in_h = DIM_W'(h); c.in_w = DIM_W'(w);
    c.k_h = K_W'(k_h); c.k_w = K_W'(k_w); c.stride = STRIDE_W'(s); c.groups = GRP_W'(groups);
    c.relu = relu; c.shift = SHIFT_W'(shift); c.first_ci = first; c.last_ci = last;
    return c;
  endfunction

  initial begin
    layer_cfg_t c;
    byte a_full [];
    byte w_full [][LANES];
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1: 3x3 convolution, stride 1, odd channel count, two groups, ReLU
    c = mk(MODE_CONV, 3, 6, 6, 3, 3, 1, 2, 1, 9, 1, 1);
    fill_mems(3, 6, 6, 2 * 9 * 3);
    ref_sums(c, 0); expect_outputs(c); run_job(c);

    // 2: 3x3 convolution, stride 2, no ReLU
    c = mk(MODE_CONV, 5, 7, 7, 3, 3, 2, 1, 0, 10, 1, 1);
    fill_mems(5, 7, 7, 9 * 5);
    ref_sums(c, 0); expect_outputs(c); run_job(c);

    // 3: fully connected: kernel covers the 2x2x16 tile, three groups = 24 outputs
    c = mk(MODE_CONV, 16, 2, 2, 2, 2, 1, 3, 0, 10, 1, 1);
    fill_mems(16, 2, 2, 3 * 4 * 16);
    ref_sums(c, 0); expect_outputs(c); run_job(c);

    // 4: 8-channel 1x3 convolution split into two 4-channel tiles via the psum buffer
    fill_mems(8, 4, 5, 2 * 3 * 8);
    a_full = abytes; w_full = wts;
    c = mk(MODE_CONV, 8, 4, 5, 1, 3, 1, 2, 1, 9, 1, 1);
    ref_sums(c, 0);                       // reference on all eight channels at once
    expect_outputs(c);
    for (int half = 0; half < 2; half++) begin
      layer_cfg_t ch;
      ch = mk(MODE_CONV, 4, 4, 5, 1, 3, 1, 2, 1, 9, half == 0, half == 1);
      abytes = new[4 * 4 * 5];
      foreach (abytes[i]) abytes[i] = a_full[(i / 4) * 8 + half * 4 + i % 4];
      wts = new[2 * 3 * 4];
      foreach (wts[i, l]) wts[i][l] = w_full[(i / 4) * 8 + half * 4 + i % 4][l];
      for (int i = 0; i < ACT_DEPTH; i++) act_mem[i] = '0;
      foreach (abytes[i]) act_mem[i / LANES][(i % LANES)*8 +: 8] = abytes[i];
      foreach (wts[i, l]) wgt_mem[i][l*8 +: 8] = wts[i][l];
      run_job(ch, half == 1);
    end

    // 5: 2x2 max pooling, stride 2, 16 channels = 2 groups
    c = mk(MODE_MAXPOOL, 16, 6, 6, 2, 2, 2, 2, 0, 0, 1, 1);
    fill_mems(16, 6, 6, 1);
    ref_sums(c, 0); expect_outputs(c); run_job(c);

    // 6: 3x3 max pooling, stride 1, with ReLU
    c = mk(MODE_MAXPOOL, 8, 5, 4, 3, 3, 1, 1, 1, 0, 1, 1);
    fill_mems(8, 5, 4, 1);
    ref_sums(c, 0); expect_outputs(c); run_job(c);

    // 7: 1x1 convolution over one channel (one-cycle windows), two groups,
    //    accumulated over three tiles: first, middle, last
    for (int part = 0; part < 3; part++) begin
      c = mk(MODE_CONV, 1, 6, 5, 1, 1, 1, 2, 1, 3, part == 0, part == 2);
      fill_mems(1, 6, 5, 2);
      ref_sums(c, part != 0);
      if (part == 2) expect_outputs(c);
      run_job(c, part == 2);
    end

    // 8: 1x1 max pooling, 16 channels: 50 one-cycle windows that all output
    c = mk(MODE_MAXPOOL, 16, 5, 5, 1, 1, 1, 2, 0, 0, 1, 1);
    fill_mems(16, 5, 5, 1);
    ref_sums(c, 0); expect_outputs(c); run_job(c);

    checks++;
    if (stall_cycles == 0) begin
      failures++;
      $display("no output stall was exercised");
    end
    $display("outputs checked: %0d, stall cycles: %0d", outs_seen, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
