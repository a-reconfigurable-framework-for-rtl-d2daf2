// accel_ctrl: the controller of the accelerator core.
//
// It manages the flow of data into the pipeline and the start of jobs:
//  * Input stream routing: every word of the 64-bit input stream carries a
//    destination bit (tdest 0 = feature-map buffer, 1 = weight buffer) and goes
//    to the fill bank of that buffer; tlast closes the tile. tready follows the
//    chosen buffer, so a stream into a buffer whose two banks are both full is
//    held back until a job frees one. The data word and tlast go to both
//    buffers unchanged (wr_data, wr_last); only the valid signals are routed.
//  * Job launch: a start request from the register file captures the current
//    layer configuration as the pending job. The job is launched into the layer
//    engine as soon as the engine is idle and its data is present: a full
//    feature-map bank, and for a convolution also a full weight bank.
//  * Completion: when the engine reports done, the feature-map bank is released,
//    and the weight bank too unless the job asked to keep it (for the next
//    tile of the same layer). A job counter increments and `irq` pulses.
//  * A tile too large for a bank sets a sticky overflow flag, cleared by the host.
//
// Timing: a job is launched at the earliest one cycle after its start request;
// banks are released in the cycle of `eng_done`, the next job can launch in the
// cycle after it.
//
// The paper gives the controller's role (feed inputs to the pipeline, stream
// outputs back, overlap transfers with computation by double buffering); the
// tdest routing, the single pending job and the keep-weights option are this
// design's choices.
module accel_ctrl
  import accel_pkg::*;
#(
  parameter int unsigned WORD_W = DEF_LANES * DEF_DATA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // input stream
  input  logic              s_tvalid,
  output logic              s_tready,
  input  logic [WORD_W-1:0] s_tdata,
  input  logic              s_tlast,
  input  logic              s_tdest,
  // fill sides of the two tile buffers
  output logic              act_wr_valid,
  input  logic              act_wr_ready,
  output logic              wgt_wr_valid,
  input  logic              wgt_wr_ready,
  output logic [WORD_W-1:0] wr_data,
  output logic              wr_last,
  input  logic              act_overflow,
  input  logic              wgt_overflow,
  // compute sides
  input  logic              act_full,
  input  logic              wgt_full,
  output logic              act_release,
  output logic              wgt_release,
  // register file
  input  logic              start_req,
  input  layer_cfg_t        cfg_in,
  input  logic              ovf_clear,
  output logic              start_pending,
  output logic              overflow,
  output logic [15:0]       jobs_done,
  output logic              irq,
  // layer engine
  output logic              eng_start,
  output layer_cfg_t        eng_cfg,
  input  logic              eng_busy,
  input  logic              eng_done
);

  layer_cfg_t pend_cfg;   // job waiting for launch
  layer_cfg_t run_cfg;    // job in the engine
  logic       running;
  logic       ready_to_go;

  // input stream routing
  assign act_wr_valid = s_tvalid && !s_tdest;
  assign wgt_wr_valid = s_tvalid &&  s_tdest;
  assign wr_data      = s_tdata;
  assign wr_last      = s_tlast;
  assign s_tready     = s_tdest ? wgt_wr_ready : act_wr_ready;

  assign ready_to_go = start_pending && !running && !eng_busy && act_full &&
                       (pend_cfg.mode == MODE_MAXPOOL || wgt_full);
  assign eng_start   = ready_to_go;
  assign eng_cfg     = pend_cfg;

  // Banks are released in the cycle of eng_done, while `running` still blocks
  // a launch, so the next job can only see the banks after the switch.
  assign act_release = eng_done;
  assign wgt_release = eng_done && (run_cfg.mode == MODE_CONV) && !run_cfg.keep_wgt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_cfg      <= '0;
      run_cfg       <= '0;
      running       <= 1'b0;
      start_pending <= 1'b0;
      overflow      <= 1'b0;
      jobs_done     <= '0;
      irq           <= 1'b0;
    end else begin
      irq         <= 1'b0;

      if (ready_to_go) begin
        start_pending <= 1'b0;
        running       <= 1'b1;
        run_cfg       <= pend_cfg;
      end
      if (start_req && !start_pending) begin
        start_pending <= 1'b1;
        pend_cfg      <= cfg_in;
      end

      if (eng_done) begin
        running     <= 1'b0;
        jobs_done   <= jobs_done + 1'b1;
        irq         <= 1'b1;
      end

      if (ovf_clear)                         overflow <= 1'b0;
      else if (act_overflow || wgt_overflow) overflow <= 1'b1;
    end
  end

  // AXI4-Stream rule: once valid, the word and its side-band stay until accepted.
  a_axis_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_tvalid && !s_tready) |=> (s_tvalid && $stable(s_tdata) && $stable(s_tdest) && $stable(s_tlast)));

endmodule
