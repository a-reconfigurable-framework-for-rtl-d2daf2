// psum_buffer: on-chip store for partial sums between input-channel tiles.
//
// When a layer has more input channels than one tile of the feature-map buffer
// holds, the host splits the channels over several jobs. Each job's sums for
// every output pixel and output-channel group are kept here, and the next job
// on the same outputs adds its own sums to them. One entry holds the LANES
// accumulators of one (group, pixel) pair.
//
// Interface: a simple dual-port RAM, one write and one read port. Timing: a
// read issued with rd_en returns rd_data one cycle later, and rd_data holds
// until the next read. A write to the address being read in the same cycle
// returns the old contents.
//
// The paper names partial-sum buffers as a stage of each dataflow pipeline; the
// depth and the use across input-channel tiles are this design's choices.
module psum_buffer
  import accel_pkg::*;
#(
  parameter int unsigned LANES = DEF_LANES,
  parameter int unsigned ACC_W = DEF_ACC_W,
  parameter int unsigned DEPTH = DEF_PSUM_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                              clk,
  input  logic                              wr_en,
  input  logic [AW-1:0]                     wr_addr,
  input  logic signed [LANES-1:0][ACC_W-1:0] wr_data,
  input  logic                              rd_en,
  input  logic [AW-1:0]                     rd_addr,
  output logic signed [LANES-1:0][ACC_W-1:0] rd_data
);

  logic [LANES*ACC_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
