// csr_axil_tb: self-checking test of the AXI4-Lite register file.
//
// A small AXI4-Lite master writes every configuration register with random
// values (AW and W presented in different cycles, random BREADY/RREADY delays),
// reads them back, checks the decoded configuration fields against the bit
// positions of the register map, a partial write with WSTRB, the start and
// overflow-clear pulses, the STATUS and JOBS words built from the inputs, and
// the busy and stall cycle counters against a count kept here while those
// inputs toggle at random, and their clearing.
module csr_axil_tb;
  import accel_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0] awaddr = '0, araddr = '0;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic arvalid = 0, arready, rvalid, rready = 0;
  logic [31:0] wdata = '0, rdata;
  logic [3:0] wstrb = '0;
  logic [1:0] bresp, rresp;
  layer_cfg_t cfg;
  logic start, ovf_clear;
  logic busy = 0, stall = 0, start_pending = 0, overflow = 0, act_full = 0, wgt_full = 0;
  logic [15:0] jobs_done = '0;

  csr_axil dut (.*);

  int checks = 0, failures = 0, starts = 0, clears = 0;
  int busy_seen = 0, stall_seen = 0;
  always @(posedge clk) if (rst_n) begin
    if (start) starts++;
    if (ovf_clear) clears++;
    if (busy) busy_seen++;
    if (stall) stall_seen++;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic axil_write(logic [7:0] a, logic [31:0] d, logic [3:0] s = 4'hF);
    awaddr = a; awvalid = 1;
    if ($urandom % 2) @(negedge clk);   // W a cycle later
    wdata = d; wstrb = s; wvalid = 1;
    #1;
    while (!(awready && wready)) begin @(negedge clk); #1; end
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    repeat ($urandom % 3) @(negedge clk);
    check(bvalid && bresp == 2'b00, "write response");
    bready = 1;
    @(negedge clk);
    bready = 0;
  endtask

  task automatic axil_read(logic [7:0] a, output logic [31:0] d);
    araddr = a; arvalid = 1;
    #1;
    while (!arready) begin @(negedge clk); #1; end
    @(negedge clk);
    arvalid = 0;
    repeat ($urandom % 3) @(negedge clk);
    check(rvalid && rresp == 2'b00, "read response");
    d = rdata;
    rready = 1;
    @(negedge clk);
    rready = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d, v_ch, v_dim, v_kern, v_grp, v_flags;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      v_ch = $urandom; v_dim = $urandom; v_kern = $urandom; v_grp = $urandom; v_flags = $urandom;
      axil_write(REG_CH, v_ch);
      axil_write(REG_DIM, v_dim);
      axil_write(REG_KERN, v_kern);
      axil_write(REG_GROUPS, v_grp);
      axil_write(REG_FLAGS, v_flags);
      axil_read(REG_CH, d);     check(d == v_ch, "CH readback");
      axil_read(REG_DIM, d);    check(d == v_dim, "DIM readback");
      axil_read(REG_KERN, d);   check(d == v_kern, "KERN readback");
      axil_read(REG_GROUPS, d); check(d == v_grp, "GROUPS readback");
      axil_read(REG_FLAGS, d);  check(d == v_flags, "FLAGS readback");
      check(cfg.in_c == v_ch[11:0] && cfg.in_h == v_dim[9:0] && cfg.in_w == v_dim[25:16] &&
            cfg.k_h == v_kern[3:0] && cfg.k_w == v_kern[11:8] && cfg.stride == v_kern[18:16] &&
            cfg.groups == v_grp[7:0] && cfg.mode == mode_e'(v_flags[0]) && cfg.relu == v_flags[1] &&
            cfg.first_ci == v_flags[2] && cfg.last_ci == v_flags[3] && cfg.keep_wgt == v_flags[4] &&
            cfg.shift == v_flags[12:8], "decoded configuration");
    end
    // byte-strobed write touches only byte 2
    axil_write(REG_DIM, 32'hAABBCCDD, 4'b0100);
    axil_read(REG_DIM, d);
    check(d == {v_dim[31:24], 8'hBB, v_dim[15:0]}, "WSTRB partial write");
    // start pulse
    axil_write(REG_CTRL, 32'h0);
    check(starts == 0, "CTRL=0 does not start");
    axil_write(REG_CTRL, 32'h1);
    check(starts == 1, "CTRL=1 starts one job");
    // performance counters
    for (int i = 0; i < 500; i++) begin
      busy = 1'($urandom); stall = busy && ($urandom % 3 == 0);
      @(negedge clk);
    end
    busy = 0; stall = 0;
    axil_read(REG_BUSYCYC, d);  check(d == 32'(busy_seen), "busy cycle counter");
    axil_read(REG_STALLCYC, d); check(d == 32'(stall_seen), "stall cycle counter");
    check(stall_seen > 20 && busy_seen > stall_seen, "counters saw activity");
    axil_write(REG_BUSYCYC, 32'h0);
    axil_read(REG_BUSYCYC, d);  check(d == 0, "busy counter cleared");
    axil_read(REG_STALLCYC, d); check(d == 32'(stall_seen), "stall counter kept");
    axil_write(REG_STALLCYC, 32'h0);
    axil_read(REG_STALLCYC, d); check(d == 0, "stall counter cleared");
    // status
    busy = 1; start_pending = 0; overflow = 1; act_full = 0; wgt_full = 1; jobs_done = 16'h1234;
    axil_read(REG_STATUS, d);
    check(d == {16'h1234, 11'd0, 1'b1, 1'b0, 1'b1, 1'b0, 1'b1}, "STATUS word");
    axil_read(REG_JOBS, d);
    check(d == 32'h1234, "JOBS word");
    axil_write(REG_JOBS, 32'h0);
    check(clears == 1, "overflow clear pulse");
    axil_read(8'h40, d);
    check(d == 0, "unmapped reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
