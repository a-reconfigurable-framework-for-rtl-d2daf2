// layer_engine: the dataflow pipeline that computes one layer tile per job.
//
// A job reads an input tile from the compute bank of the feature-map buffer
// (DATA_W-bit values, 8 by default, stored height-width-channel: element
// address (y*in_w + x)*in_c + c, LANES elements per word)
// and, for convolutions, the weights from the weight buffer (one word per
// kernel position and input channel, holding the weights of the LANES output
// channels of a group: word address ((g*k_h + ky)*k_w + kx)*in_c + c). The
// tile is taken as already padded: the engine slides a k_h x k_w window with
// the given stride over it and produces an output wherever the window fits.
//
// Loop order: output-channel group g, output row, output column; for each
// output pixel the window is visited kernel row by kernel row, kernel column,
// then input channel, one element per cycle. A convolution broadcasts the
// element to the LANES MAC lanes, each multiplying it by the weight of its own
// output channel. Max pooling reads one word holding LANES channels at each
// window position and keeps a running maximum per lane (in_c must then be a
// multiple of LANES, and g selects channels g*LANES..g*LANES+LANES-1). A fully
// connected layer is a convolution whose kernel is as large as the tile.
//
// Pipeline: address generation issues one window element per cycle to the
// two buffers; one cycle later the read data reaches the MAC lanes; when a
// window's last element has been accumulated its LANES sums are merged with the
// partial-sum buffer: when cfg.first_ci is clear the stored sums of an earlier
// input-channel tile are added; when cfg.last_ci is clear the result is stored
// back and nothing is output, otherwise it passes through the activation
// sub-block (ReLU, shift, saturate to DATA_W bits) into a small result queue
// and one word of LANES results per output pixel and group is offered on the
// output port, in loop order, the job's last word flagged. The next window is
// issued in the cycle after the last element of the previous one, so windows
// follow each other with no idle cycles while their sums drain behind them.
// Every flag a window needs later (first, last, partial-sum index, last pixel)
// travels down the pipeline with it.
//
// Back-pressure: a window that produces an output reserves a slot of the
// RQ_DEPTH-entry result queue when its first element is issued, and the slot is
// freed when the word leaves on the output port. When all slots are reserved
// the next window waits before its first element (`stall` is high). Windows
// already issued always find room, so the read pipeline never has to stop.
//
// Timing: `start` is taken in IDLE and latches cfg. Two set-up cycles compute
// the strides, then each output pixel takes W cycles, W = k_h*k_w*in_c for a
// convolution and k_h*k_w for pooling, plus any cycles it waits for a queue
// slot. After the last element the pipeline drains in 3 cycles (2 when the
// job only stores partial sums), then one DONE cycle, after which `done`
// pulses. `busy` is high for 6 + sum of W + stall cycles (5 + ... when the job
// only stores), and `done` is seen 7 + ... (6 + ...) cycles after the cycle
// in which `start` is applied.
// The job's last words can still be in the queue after `done`; the next job
// may start meanwhile. Memory reads have one cycle of latency.
//
// The paper specifies MAC units, activation sub-blocks and partial-sum buffers
// chained as a pipeline in which data flows with minimal idle cycles, with
// kernel size, channel count and stride set at run time; the data layouts, the
// loop order, the one-element-per-cycle schedule, the result queue and its
// credit scheme are this design's choices.
module layer_engine
  import accel_pkg::*;
#(
  parameter int unsigned LANES      = DEF_LANES,
  parameter int unsigned DATA_W     = DEF_DATA_W,
  parameter int unsigned ACC_W      = DEF_ACC_W,
  parameter int unsigned ACT_DEPTH  = DEF_ACT_DEPTH,
  parameter int unsigned WGT_DEPTH  = DEF_WGT_DEPTH,
  parameter int unsigned PSUM_DEPTH = DEF_PSUM_DEPTH,
  localparam int unsigned WORD_W    = LANES * DATA_W,
  localparam int unsigned ACT_AW    = $clog2(ACT_DEPTH),
  localparam int unsigned WGT_AW    = $clog2(WGT_DEPTH),
  localparam int unsigned PSUM_AW   = $clog2(PSUM_DEPTH),
  localparam int unsigned SEL_W     = (LANES > 1) ? $clog2(LANES) : 1,
  localparam int unsigned RQ_DEPTH  = 8    // result queue entries
) (
  input  logic               clk,
  input  logic               rst_n,
  // job control
  input  logic               start,
  input  layer_cfg_t         cfg,
  output logic               busy,
  output logic               done,
  // feature-map buffer read port
  output logic               act_rd_en,
  output logic [ACT_AW-1:0]  act_rd_addr,
  input  logic [WORD_W-1:0]  act_rd_data,
  // weight buffer read port
  output logic               wgt_rd_en,
  output logic [WGT_AW-1:0]  wgt_rd_addr,
  input  logic [WORD_W-1:0]  wgt_rd_data,
  // output port (valid/ready)
  output logic               out_valid,
  input  logic               out_ready,
  output logic [WORD_W-1:0]  out_data,
  output logic               out_last,
  // observation
  output logic               stall
);

  typedef enum logic [2:0] {S_IDLE, S_SETUP1, S_SETUP2, S_RUN, S_FLUSH, S_DONE} state_e;
  state_e state;

  layer_cfg_t  c;            // latched configuration
  logic [31:0] row_stride;   // elements per tile row
  logic [31:0] row_step;     // elements between output rows
  logic [31:0] px_step;      // elements between output columns
  logic [31:0] kk;           // k_h * k_w
  logic [31:0] win_len;      // elements per window
  logic [CH_W-1:0] ci_len;   // channels visited per window position

  // loop counters and running addresses
  logic [GRP_W-1:0]  g;
  logic [DIM_W+1:0]  iy0, ix0;
  logic [K_W-1:0]    ky, kx;
  logic [CH_W-1:0]   ci;
  logic [31:0]       row_base, pix_base, win_row, win_px, grp_off;
  logic [31:0]       wgt_base, wgt_addr;
  logic [PSUM_AW-1:0] psum_idx;

  // flags travelling with the data: stage 1 is aligned with the memory read
  // data, stage 2 with the window's final sum, stage 3 with the quantised word
  logic               v1, first1, last1, plast1;
  logic [SEL_W-1:0]   sel1;
  logic [PSUM_AW-1:0] pidx1, pidx2;
  logic               done2, plast2, plast3;

  // result queue and its slot reservations
  localparam int unsigned RQ_AW = $clog2(RQ_DEPTH);
  logic [RQ_AW:0] reserved;
  logic           rq_full, rq_empty, rq_pop;
  logic [RQ_AW:0] rq_count;

  // ---------------------------------------------------------------- datapath
  logic [31:0] byte_addr;
  logic        at_first, win_last, col_last, row_last, grp_last, pix_last;
  logic        blocked, issue, finish;
  logic signed [LANES-1:0][DATA_W-1:0] mac_act;
  logic signed [LANES-1:0][ACC_W-1:0]  acc, psum_rd, sum;
  logic        use_psum, store_psum;
  logic        aq_valid;
  logic signed [LANES-1:0][DATA_W-1:0] aq_out;

  assign byte_addr = win_px + 32'(ci) + grp_off;
  assign at_first  = (ci == '0) && (kx == '0) && (ky == '0);
  assign win_last  = (32'(ci) + 1 >= 32'(ci_len)) && (kx + 1'b1 >= c.k_w) && (ky + 1'b1 >= c.k_h);
  assign col_last  = (ix0 + (DIM_W+2)'(c.stride) + (DIM_W+2)'(c.k_w)) > (DIM_W+2)'(c.in_w);
  assign row_last  = (iy0 + (DIM_W+2)'(c.stride) + (DIM_W+2)'(c.k_h)) > (DIM_W+2)'(c.in_h);
  assign grp_last  = (g + 1'b1 >= c.groups);
  assign pix_last  = col_last && row_last && grp_last;

  assign use_psum   = (c.mode == MODE_CONV) && !c.first_ci;
  assign store_psum = (c.mode == MODE_CONV) && !c.last_ci;

  // a window that will produce an output needs a free queue slot to begin
  assign blocked = at_first && !store_psum && (32'(reserved) >= RQ_DEPTH);
  assign issue   = (state == S_RUN) && !blocked;

  assign act_rd_en   = issue;
  assign act_rd_addr = ACT_AW'(byte_addr >> $clog2(LANES));
  assign wgt_rd_en   = issue && (c.mode == MODE_CONV);
  assign wgt_rd_addr = WGT_AW'(wgt_addr);

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      if (c.mode == MODE_MAXPOOL) mac_act[l] = act_rd_data[l*DATA_W +: DATA_W];
      else                        mac_act[l] = act_rd_data[32'(sel1)*DATA_W +: DATA_W];
    end
  end

  mac_array #(.LANES(LANES), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_mac (
    .clk, .rst_n,
    .valid (v1),
    .first (first1),
    .mode  (c.mode),
    .act   (mac_act),
    .wgt   (wgt_rd_data),
    .acc   (acc)
  );

  always_comb begin
    for (int l = 0; l < LANES; l++) sum[l] = acc[l] + (use_psum ? psum_rd[l] : '0);
  end

  // read the stored sums while the window's last element is multiplied, so
  // they are ready together with the final accumulator value
  psum_buffer #(.LANES(LANES), .ACC_W(ACC_W), .DEPTH(PSUM_DEPTH)) u_psum (
    .clk,
    .wr_en   (done2 && store_psum),
    .wr_addr (pidx2),
    .wr_data (sum),
    .rd_en   (v1 && last1),
    .rd_addr (pidx1),
    .rd_data (psum_rd)
  );

  act_quant #(.LANES(LANES), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_aq (
    .clk, .rst_n,
    .in_valid  (done2 && !store_psum),
    .relu      (c.relu),
    .shift     (c.shift),
    .in        (sum),
    .out_valid (aq_valid),
    .out       (aq_out)
  );

  out_fifo #(.WIDTH(WORD_W + 1), .DEPTH(RQ_DEPTH)) u_rq (
    .clk, .rst_n,
    .push    (aq_valid),
    .wr_data ({plast3, aq_out}),
    .full    (rq_full),
    .pop     (rq_pop),
    .rd_data ({out_last, out_data}),
    .empty   (rq_empty),
    .count   (rq_count)
  );

  assign out_valid = !rq_empty;
  assign rq_pop    = out_valid && out_ready;
  assign stall     = (state == S_RUN) && blocked;
  assign busy      = (state != S_IDLE);
  // the job's last result has left the pipeline
  assign finish    = store_psum ? (done2 && plast2) : (aq_valid && plast3);

  // -------------------------------------------------------------- sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      c          <= '0;
      row_stride <= '0;
      row_step   <= '0;
      px_step    <= '0;
      kk         <= '0;
      win_len    <= '0;
      ci_len     <= '0;
      g          <= '0;
      iy0        <= '0;
      ix0        <= '0;
      ky         <= '0;
      kx         <= '0;
      ci         <= '0;
      row_base   <= '0;
      pix_base   <= '0;
      win_row    <= '0;
      win_px     <= '0;
      grp_off    <= '0;
      wgt_base   <= '0;
      wgt_addr   <= '0;
      psum_idx   <= '0;
      v1         <= 1'b0;
      first1     <= 1'b0;
      last1      <= 1'b0;
      plast1     <= 1'b0;
      sel1       <= '0;
      pidx1      <= '0;
      pidx2      <= '0;
      done2      <= 1'b0;
      plast2     <= 1'b0;
      plast3     <= 1'b0;
      reserved   <= '0;
      done       <= 1'b0;
    end else begin
      // read pipeline
      v1     <= issue;
      first1 <= issue && at_first;
      last1  <= issue && win_last;
      plast1 <= issue && win_last && pix_last;
      sel1   <= SEL_W'(byte_addr);
      pidx1  <= psum_idx;
      done2  <= v1 && last1;
      plast2 <= v1 && last1 && plast1;
      pidx2  <= pidx1;
      plast3 <= done2 && plast2;
      done   <= 1'b0;

      reserved <= reserved + (RQ_AW+1)'(issue && at_first && !store_psum) - (RQ_AW+1)'(rq_pop);

      unique case (state)
        S_IDLE: if (start) begin
          c     <= cfg;
          state <= S_SETUP1;
        end
        S_SETUP1: begin
          row_stride <= 32'(c.in_w) * 32'(c.in_c);
          px_step    <= 32'(c.stride) * 32'(c.in_c);
          kk         <= 32'(c.k_h) * 32'(c.k_w);
          ci_len     <= (c.mode == MODE_CONV) ? c.in_c : CH_W'(1);
          state      <= S_SETUP2;
        end
        S_SETUP2: begin
          row_step <= 32'(c.stride) * row_stride;
          win_len  <= kk * 32'(ci_len);
          g        <= '0;
          iy0      <= '0;
          ix0      <= '0;
          ky       <= '0;
          kx       <= '0;
          ci       <= '0;
          row_base <= '0;
          pix_base <= '0;
          win_row  <= '0;
          win_px   <= '0;
          grp_off  <= '0;
          wgt_base <= '0;
          wgt_addr <= '0;
          psum_idx <= '0;
          state    <= S_RUN;
        end
        S_RUN: if (issue) begin
          wgt_addr <= wgt_addr + 1;
          if (32'(ci) + 1 < 32'(ci_len)) begin
            ci <= ci + 1'b1;
          end else begin
            ci <= '0;
            if (kx + 1'b1 < c.k_w) begin
              kx     <= kx + 1'b1;
              win_px <= win_px + 32'(c.in_c);
            end else begin
              kx <= '0;
              if (ky + 1'b1 < c.k_h) begin
                ky      <= ky + 1'b1;
                win_row <= win_row + row_stride;
                win_px  <= win_row + row_stride;
              end else begin
                // last element of the window: move on to the next output pixel
                logic [31:0] nb;
                ky       <= '0;
                psum_idx <= psum_idx + 1'b1;
                nb = pix_base;
                if (!col_last) begin
                  ix0 <= ix0 + (DIM_W+2)'(c.stride);
                  nb  = pix_base + px_step;
                end else if (!row_last) begin
                  ix0      <= '0;
                  iy0      <= iy0 + (DIM_W+2)'(c.stride);
                  row_base <= row_base + row_step;
                  nb       = row_base + row_step;
                end else begin
                  ix0      <= '0;
                  iy0      <= '0;
                  row_base <= '0;
                  nb       = '0;
                  g        <= g + 1'b1;
                  wgt_base <= wgt_base + win_len;
                  if (c.mode == MODE_MAXPOOL) grp_off <= grp_off + LANES;
                end
                pix_base <= nb;
                win_row  <= nb;
                win_px   <= nb;
                wgt_addr <= (col_last && row_last) ? wgt_base + win_len : wgt_base;
                if (pix_last) state <= S_FLUSH;
              end
            end
          end
        end
        S_FLUSH: if (finish) state <= S_DONE;
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Reserved slots cover every word in the queue, so the queue cannot overflow.
  a_queue_room: assert property (@(posedge clk) disable iff (!rst_n)
    aq_valid |-> !rq_full);
  a_reserved_bound: assert property (@(posedge clk) disable iff (!rst_n)
    (32'(reserved) <= RQ_DEPTH) && (reserved >= (RQ_AW+1)'(rq_count)));

  a_cfg_valid: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> (cfg.stride != '0 && cfg.k_h != '0 && cfg.k_w != '0 &&
                                    cfg.in_c != '0 && cfg.groups != '0 &&
                                    DIM_W'(cfg.k_h) <= cfg.in_h && DIM_W'(cfg.k_w) <= cfg.in_w));

endmodule
