// accel_ctrl_tb: self-checking test of the controller.
//
// The buffers and the engine around the controller are modelled by the bench.
// Checks: stream words reach the buffer their tdest selects and tready follows
// that buffer; a start request captures the configuration; a convolution waits
// for both a feature-map and a weight bank, max pooling only for a feature-map
// bank; no job is launched while the engine is busy; on done the right banks
// are released (weights kept when asked), the job counter counts and irq
// pulses; the overflow flag is sticky until cleared.
module accel_ctrl_tb;
  import accel_pkg::*;
  localparam int WORD_W = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_tvalid = 0, s_tready, s_tlast = 0, s_tdest = 0;
  logic [WORD_W-1:0] s_tdata = '0;
  logic act_wr_valid, act_wr_ready = 1, wgt_wr_valid, wgt_wr_ready = 1;
  logic [WORD_W-1:0] wr_data;
  logic wr_last, act_overflow = 0, wgt_overflow = 0;
  logic act_full = 0, wgt_full = 0, act_release, wgt_release;
  logic start_req = 0, ovf_clear = 0, start_pending, overflow, irq;
  layer_cfg_t cfg_in, eng_cfg;
  logic [15:0] jobs_done;
  logic eng_start, eng_busy = 0, eng_done = 0;

  accel_ctrl #(.WORD_W(WORD_W)) dut (.*);

  int checks = 0, failures = 0;
  int starts = 0, act_rel = 0, wgt_rel = 0, irqs = 0;
  always @(posedge clk) if (rst_n) begin
    if (eng_start) starts++;
    if (act_release) act_rel++;
    if (wgt_release) wgt_rel++;
    if (irq) irqs++;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic request(mode_e m, bit keep, logic [CH_W-1:0] ch);
    cfg_in = '0; cfg_in.mode = m; cfg_in.keep_wgt = keep; cfg_in.in_c = ch;
    start_req = 1;
    @(negedge clk);
    start_req = 0;
    cfg_in = '0;
  endtask

  task automatic finish_job();
    eng_busy = 1;
    repeat (3) @(negedge clk);
    eng_busy = 0; eng_done = 1;
    @(negedge clk);
    eng_done = 0;
    @(negedge clk);
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // routing
    for (int i = 0; i < 40; i++) begin
      if (!(s_tvalid && !s_tready)) begin  // a word not yet taken must stay put
        s_tvalid = $urandom % 2; s_tdest = $urandom % 2; s_tlast = $urandom % 2;
        s_tdata = {$urandom, $urandom};
      end
      act_wr_ready = $urandom % 2; wgt_wr_ready = $urandom % 2;
      #1;
      check(act_wr_valid == (s_tvalid && !s_tdest) && wgt_wr_valid == (s_tvalid && s_tdest) &&
            wr_data == s_tdata && wr_last == s_tlast &&
            s_tready == (s_tdest ? wgt_wr_ready : act_wr_ready), "stream routing");
      @(negedge clk);
    end
    s_tvalid = 0; s_tlast = 0;

    // convolution: waits for both banks
    request(MODE_CONV, 0, 12'd77);
    check(start_pending && !eng_start, "conv pending without data");
    act_full = 1;
    @(negedge clk);
    check(!eng_start && starts == 0, "conv waits for weights");
    wgt_full = 1;
    #1;
    check(eng_start && eng_cfg.in_c == 12'd77, "conv launched with captured config");
    @(negedge clk);
    check(!start_pending && starts == 1, "single launch");
    request(MODE_CONV, 1, 12'd5);   // next job requested while the first runs
    eng_busy = 1;
    repeat (3) @(negedge clk);
    check(starts == 1, "no launch while engine busy");
    eng_busy = 0; eng_done = 1;
    #1;
    check(act_release && wgt_release && !eng_start, "release both banks with done, no launch yet");
    @(negedge clk);
    eng_done = 0;
    check(irq && jobs_done == 1, "irq and job count after conv");
    #1;
    check(eng_start && eng_cfg.in_c == 12'd5 && eng_cfg.keep_wgt, "second job launched after done");
    @(negedge clk);
    finish_job();
    check(act_rel == 2 && wgt_rel == 1, "weights kept when keep_wgt is set");

    // max pooling needs no weight bank
    wgt_full = 0;
    request(MODE_MAXPOOL, 0, 12'd16);
    @(negedge clk);
    check(starts == 3, "pooling launched without weights");
    finish_job();
    check(act_rel == 3 && wgt_rel == 1 && jobs_done == 3 && irqs == 3, "pooling releases only feature maps");

    // overflow flag
    check(!overflow, "no overflow yet");
    wgt_overflow = 1;
    @(negedge clk);
    wgt_overflow = 0;
    repeat (3) @(negedge clk);
    check(overflow, "overflow sticky");
    ovf_clear = 1;
    @(negedge clk);
    ovf_clear = 0;
    check(!overflow, "overflow cleared");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
