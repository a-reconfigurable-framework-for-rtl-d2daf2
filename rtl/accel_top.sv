// accel_top: the FPGA accelerator core, all blocks wired together.
//
// The host (a CPU running the scheduling agent and a DMA engine) sees three
// ports: an AXI4-Lite register file for job set-up and status, an input
// AXI4-Stream that carries tiles of feature maps and weights (tdest selects the
// buffer) and an output AXI4-Stream that returns the results, one word of
// LANES 8-bit outputs per output pixel and channel group, tlast on a job's last
// word. `irq` pulses when a job completes.
//
// Data path: input stream -> accel_ctrl routing -> tile_buffer (feature maps,
// two banks) and tile_buffer (weights, two banks) -> layer_engine (address
// generation, mac_array, psum_buffer, act_quant) -> out_fifo -> output stream.
// While the engine computes on one bank of each buffer the host streams the
// next tile into the other, so transfers overlap with computation.
//
// Use: write CH, DIM, KERN, GROUPS, FLAGS, then CTRL=1; stream the feature-map
// tile (tdest 0) and, for a convolution, the weights (tdest 1), each ended by
// tlast, in any order and before or after the start request. The job runs when
// both are present and the engine is free.
//
// Timing: see layer_engine for the cycles per output pixel; the output FIFO
// adds one cycle between the engine and the output stream.
// The buffers' per-bank status and the FIFO fill level are wired out of their
// modules but not used here; they are left for debug probes.
//
// Following the paper: a parameterisable core of parallel 8-bit MAC units in a
// dataflow pipeline with activation and partial-sum stages, a controller,
// run-time layer configuration, on-chip tile buffers with double buffering, and
// AXI as the host interface. The rest (sizes, register map, stream format,
// data layouts) is this design's own.
module accel_top
  import accel_pkg::*;
#(
  parameter int unsigned LANES      = DEF_LANES,
  parameter int unsigned DATA_W     = DEF_DATA_W,
  parameter int unsigned ACC_W      = DEF_ACC_W,
  parameter int unsigned ACT_DEPTH  = DEF_ACT_DEPTH,
  parameter int unsigned WGT_DEPTH  = DEF_WGT_DEPTH,
  parameter int unsigned PSUM_DEPTH = DEF_PSUM_DEPTH,
  parameter int unsigned FIFO_DEPTH = DEF_FIFO_DEPTH,
  localparam int unsigned WORD_W    = LANES * DATA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite register file
  input  logic [7:0]        s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [7:0]        s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  // input stream: feature maps (tdest 0) and weights (tdest 1)
  input  logic              s_axis_tvalid,
  output logic              s_axis_tready,
  input  logic [WORD_W-1:0] s_axis_tdata,
  input  logic              s_axis_tlast,
  input  logic              s_axis_tdest,
  // output stream
  output logic              m_axis_tvalid,
  input  logic              m_axis_tready,
  output logic [WORD_W-1:0] m_axis_tdata,
  output logic              m_axis_tlast,
  // job completed
  output logic              irq
);

  localparam int unsigned ACT_AW = $clog2(ACT_DEPTH);
  localparam int unsigned WGT_AW = $clog2(WGT_DEPTH);

  layer_cfg_t csr_cfg, eng_cfg;
  logic start_req, ovf_clear, start_pending, overflow;
  logic [15:0] jobs_done;

  logic act_wr_valid, act_wr_ready, wgt_wr_valid, wgt_wr_ready, wr_last;
  logic [WORD_W-1:0] wr_data;
  logic act_overflow, wgt_overflow, act_full, wgt_full, act_release, wgt_release;
  logic [1:0] act_bank_full, wgt_bank_full;
  logic act_fill_bank, act_comp_bank, wgt_fill_bank, wgt_comp_bank;

  logic eng_start, eng_busy, eng_done, eng_stall;
  logic act_rd_en, wgt_rd_en;
  logic [ACT_AW-1:0] act_rd_addr;
  logic [WGT_AW-1:0] wgt_rd_addr;
  logic [WORD_W-1:0] act_rd_data, wgt_rd_data;
  logic eng_out_valid, eng_out_last, fifo_full, fifo_empty;
  logic [WORD_W-1:0] eng_out_data;
  logic [$clog2(FIFO_DEPTH):0] fifo_count;

  csr_axil u_csr (
    .clk, .rst_n,
    .awaddr (s_axil_awaddr), .awvalid (s_axil_awvalid), .awready (s_axil_awready),
    .wdata  (s_axil_wdata),  .wstrb   (s_axil_wstrb),   .wvalid  (s_axil_wvalid),
    .wready (s_axil_wready), .bresp   (s_axil_bresp),   .bvalid  (s_axil_bvalid),
    .bready (s_axil_bready), .araddr  (s_axil_araddr),  .arvalid (s_axil_arvalid),
    .arready(s_axil_arready),.rdata   (s_axil_rdata),   .rresp   (s_axil_rresp),
    .rvalid (s_axil_rvalid), .rready  (s_axil_rready),
    .cfg (csr_cfg), .start (start_req), .ovf_clear,
    .busy (eng_busy), .stall (eng_stall), .start_pending, .overflow, .act_full, .wgt_full, .jobs_done
  );

  accel_ctrl #(.WORD_W(WORD_W)) u_ctrl (
    .clk, .rst_n,
    .s_tvalid (s_axis_tvalid), .s_tready (s_axis_tready), .s_tdata (s_axis_tdata),
    .s_tlast  (s_axis_tlast),  .s_tdest  (s_axis_tdest),
    .act_wr_valid, .act_wr_ready, .wgt_wr_valid, .wgt_wr_ready, .wr_data, .wr_last,
    .act_overflow, .wgt_overflow, .act_full, .wgt_full, .act_release, .wgt_release,
    .start_req, .cfg_in (csr_cfg), .ovf_clear, .start_pending, .overflow, .jobs_done, .irq,
    .eng_start, .eng_cfg, .eng_busy, .eng_done
  );

  tile_buffer #(.WORD_W(WORD_W), .DEPTH(ACT_DEPTH)) u_act_buf (
    .clk, .rst_n,
    .wr_valid (act_wr_valid), .wr_ready (act_wr_ready), .wr_data, .wr_last,
    .overflow (act_overflow),
    .rd_full  (act_full), .rd_en (act_rd_en), .rd_addr (act_rd_addr), .rd_data (act_rd_data),
    .release_bank (act_release),
    .bank_full (act_bank_full), .fill_bank (act_fill_bank), .comp_bank (act_comp_bank)
  );

  tile_buffer #(.WORD_W(WORD_W), .DEPTH(WGT_DEPTH)) u_wgt_buf (
    .clk, .rst_n,
    .wr_valid (wgt_wr_valid), .wr_ready (wgt_wr_ready), .wr_data, .wr_last,
    .overflow (wgt_overflow),
    .rd_full  (wgt_full), .rd_en (wgt_rd_en), .rd_addr (wgt_rd_addr), .rd_data (wgt_rd_data),
    .release_bank (wgt_release),
    .bank_full (wgt_bank_full), .fill_bank (wgt_fill_bank), .comp_bank (wgt_comp_bank)
  );

  layer_engine #(
    .LANES (LANES), .DATA_W (DATA_W), .ACC_W (ACC_W),
    .ACT_DEPTH (ACT_DEPTH), .WGT_DEPTH (WGT_DEPTH), .PSUM_DEPTH (PSUM_DEPTH)
  ) u_engine (
    .clk, .rst_n,
    .start (eng_start), .cfg (eng_cfg), .busy (eng_busy), .done (eng_done),
    .act_rd_en, .act_rd_addr, .act_rd_data,
    .wgt_rd_en, .wgt_rd_addr, .wgt_rd_data,
    .out_valid (eng_out_valid), .out_ready (!fifo_full),
    .out_data (eng_out_data), .out_last (eng_out_last),
    .stall (eng_stall)
  );

  out_fifo #(.WIDTH(WORD_W + 1), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .push (eng_out_valid && !fifo_full), .wr_data ({eng_out_last, eng_out_data}), .full (fifo_full),
    .pop (m_axis_tvalid && m_axis_tready), .rd_data ({m_axis_tlast, m_axis_tdata}),
    .empty (fifo_empty), .count (fifo_count)
  );

  assign m_axis_tvalid = !fifo_empty;

endmodule
