// mac_array: the parallel multiply-accumulate units of the accelerator core.
//
// LANES independent lanes, each with a signed DATA_W x DATA_W multiplier and an
// ACC_W accumulator. In convolution mode every valid cycle adds act[l]*wgt[l] to
// lane l's accumulator; a cycle with `first` set starts a new sum instead of
// adding to the old one. In max-pool mode a lane keeps the running maximum of
// act[l] (and `first` loads it). The layer engine broadcasts one activation to
// all lanes for a convolution, so the lanes compute LANES output channels of
// the same output pixel, and gives each lane its own channel for pooling.
//
// Timing: one operation per cycle, no stall; acc is updated at the clock edge
// that samples `valid` and can be read in the following cycle.
//
// That the core has parallel MAC units working on 8-bit integers follows the
// paper; the lane count, the accumulator width and folding max pooling into the
// same lanes are this design's choices.
module mac_array
  import accel_pkg::*;
#(
  parameter int unsigned LANES  = DEF_LANES,
  parameter int unsigned DATA_W = DEF_DATA_W,
  parameter int unsigned ACC_W  = DEF_ACC_W
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           valid,
  input  logic                           first,
  input  mode_e                          mode,
  input  logic signed [LANES-1:0][DATA_W-1:0] act,
  input  logic signed [LANES-1:0][DATA_W-1:0] wgt,
  output logic signed [LANES-1:0][ACC_W-1:0]  acc
);

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic signed [DATA_W-1:0]   a, w;
    logic signed [2*DATA_W-1:0] prod;
    logic signed [ACC_W-1:0]    a_ext, base, cur;

    assign a     = act[l];
    assign w     = wgt[l];
    assign prod  = a * w;
    assign a_ext = ACC_W'(a);
    assign cur   = $signed(acc[l]);  // an element of a packed array is unsigned
    assign base  = first ? '0 : cur;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        acc[l] <= '0;
      end else if (valid) begin
        if (mode == MODE_MAXPOOL) begin
          acc[l] <= (first || a_ext > cur) ? a_ext : cur;
        end else begin
          acc[l] <= base + ACC_W'(prod);
        end
      end
    end
  end

endmodule
