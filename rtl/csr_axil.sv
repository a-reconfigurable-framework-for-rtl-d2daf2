// csr_axil: AXI4-Lite register file of the accelerator core.
//
// The host driver programs a job here: channel count, tile size, kernel size,
// stride, number of output-channel groups, mode and activation flags, then
// writes CTRL bit 0 to request the job. The register map (byte addresses) is
// in accel_pkg:
//   0x00 CTRL   W  bit0 start
//   0x04 STATUS R  bit0 engine busy, bit1 start pending, bit2 overflow,
//                  bit3 feature-map bank full, bit4 weight bank full, [31:16] jobs
//   0x08 CH     RW in_c[11:0]
//   0x0C DIM    RW in_h[9:0], in_w[25:16]
//   0x10 KERN   RW k_h[3:0], k_w[11:8], stride[18:16]
//   0x14 GROUPS RW groups[7:0]
//   0x18 FLAGS  RW mode[0] relu[1] first_ci[2] last_ci[3] keep_wgt[4] shift[12:8]
//   0x1C JOBS   R  jobs completed; W any value: clear the overflow flag
//   0x20 BUSYCYC  R cycles the engine was busy;              W any value: clear
//   0x24 STALLCYC R cycles the engine waited on a full output; W any value: clear
// The two counters are performance feedback for the scheduler: from them it
// can measure how long a layer took on the core and how much of that time the
// output side held it up. They count from reset or their last clear and stop
// at their maximum instead of wrapping.
// Unmapped addresses read as zero and ignore writes; responses are always OKAY.
//
// Timing: a write is accepted in the cycle both AW and W are valid and no
// response is outstanding; BVALID follows one cycle later. A read is accepted
// when no read data is outstanding; RVALID follows one cycle later. start and
// ovf_clear are one-cycle pulses in the cycle after the write is accepted.
//
// The paper says kernel dimensions, channel counts and stride are configured at
// run time and that FPGA SoCs use AXI, and that the scheduler may decide from
// previous performance measurements and dynamic feedback from the system; the
// register map, the choice of counters and the AXI4-Lite timing are this
// design's choices.
module csr_axil
  import accel_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [7:0]  awaddr,
  input  logic        awvalid,
  output logic        awready,
  input  logic [31:0] wdata,
  input  logic [3:0]  wstrb,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready,
  input  logic [7:0]  araddr,
  input  logic        arvalid,
  output logic        arready,
  output logic [31:0] rdata,
  output logic [1:0]  rresp,
  output logic        rvalid,
  input  logic        rready,
  // to the core
  output layer_cfg_t  cfg,
  output logic        start,
  output logic        ovf_clear,
  // status from the core
  input  logic        busy,
  input  logic        stall,
  input  logic        start_pending,
  input  logic        overflow,
  input  logic        act_full,
  input  logic        wgt_full,
  input  logic [15:0] jobs_done
);

  logic wr_go, rd_go;
  logic [31:0] wmask;

  assign wr_go   = awvalid && wvalid && !bvalid;
  assign awready = wr_go;
  assign wready  = wr_go;
  assign rd_go   = arvalid && !rvalid;
  assign arready = rd_go;
  assign bresp   = 2'b00;
  assign rresp   = 2'b00;

  always_comb begin
    for (int b = 0; b < 4; b++) wmask[b*8 +: 8] = {8{wstrb[b]}};
  end

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] nw, logic [31:0] m);
    return (old & ~m) | (nw & m);
  endfunction

  // register images
  logic [31:0] r_ch, r_dim, r_kern, r_grp, r_flags;
  logic [31:0] busy_cyc, stall_cyc;   // performance counters

  assign cfg.in_c     = r_ch[CH_W-1:0];
  assign cfg.in_h     = r_dim[DIM_W-1:0];
  assign cfg.in_w     = r_dim[16 +: DIM_W];
  assign cfg.k_h      = r_kern[K_W-1:0];
  assign cfg.k_w      = r_kern[8 +: K_W];
  assign cfg.stride   = r_kern[16 +: STRIDE_W];
  assign cfg.groups   = r_grp[GRP_W-1:0];
  assign cfg.mode     = mode_e'(r_flags[0]);
  assign cfg.relu     = r_flags[1];
  assign cfg.first_ci = r_flags[2];
  assign cfg.last_ci  = r_flags[3];
  assign cfg.keep_wgt = r_flags[4];
  assign cfg.shift    = r_flags[8 +: SHIFT_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_ch      <= 32'd1;
      r_dim     <= {16'd1, 16'd1};
      r_kern    <= {16'd1, 8'd1, 8'd1};
      r_grp     <= 32'd1;
      r_flags   <= 32'h0000_000C;   // conv, first and last tile
      bvalid    <= 1'b0;
      rvalid    <= 1'b0;
      rdata     <= '0;
      start     <= 1'b0;
      ovf_clear <= 1'b0;
      busy_cyc  <= '0;
      stall_cyc <= '0;
    end else begin
      if (busy && busy_cyc != '1)   busy_cyc  <= busy_cyc + 32'd1;
      if (stall && stall_cyc != '1) stall_cyc <= stall_cyc + 32'd1;
      start     <= 1'b0;
      ovf_clear <= 1'b0;
      if (bvalid && bready) bvalid <= 1'b0;
      if (rvalid && rready) rvalid <= 1'b0;

      if (wr_go) begin
        bvalid <= 1'b1;
        unique case (awaddr & 8'hFC)
          REG_CTRL:   start     <= wdata[0] && wstrb[0];
          REG_CH:     r_ch      <= merge(r_ch, wdata, wmask);
          REG_DIM:    r_dim     <= merge(r_dim, wdata, wmask);
          REG_KERN:   r_kern    <= merge(r_kern, wdata, wmask);
          REG_GROUPS: r_grp     <= merge(r_grp, wdata, wmask);
          REG_FLAGS:  r_flags   <= merge(r_flags, wdata, wmask);
          REG_JOBS:   ovf_clear <= 1'b1;
          REG_BUSYCYC:  busy_cyc  <= '0;
          REG_STALLCYC: stall_cyc <= '0;
          default: ;
        endcase
      end

      if (rd_go) begin
        rvalid <= 1'b1;
        unique case (araddr & 8'hFC)
          REG_STATUS: rdata <= {jobs_done, 11'd0, wgt_full, act_full, overflow, start_pending, busy};
          REG_CH:     rdata <= r_ch;
          REG_DIM:    rdata <= r_dim;
          REG_KERN:   rdata <= r_kern;
          REG_GROUPS: rdata <= r_grp;
          REG_FLAGS:  rdata <= r_flags;
          REG_JOBS:   rdata <= {16'd0, jobs_done};
          REG_BUSYCYC:  rdata <= busy_cyc;
          REG_STALLCYC: rdata <= stall_cyc;
          default:    rdata <= '0;
        endcase
      end
    end
  end

  // AXI4-Lite rules: a response stays valid until it is taken.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n) (bvalid && !bready) |=> bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (rvalid && !rready) |=> (rvalid && $stable(rdata)));

endmodule
