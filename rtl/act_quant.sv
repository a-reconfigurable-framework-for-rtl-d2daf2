// act_quant: the activation sub-block at the end of the dataflow pipeline.
//
// Takes LANES accumulator values, applies ReLU when `relu` is set, shifts each
// value right arithmetically by `shift` (the requantisation scale, a power of
// two) with round-half-up, and saturates the result to a signed DATA_W value,
// so that the outputs of a layer are again 8-bit activations for the next one.
//
// Timing: one register stage. `out` and `out_valid` follow `in_valid` by one
// cycle; `out` holds its value until the next `in_valid`.
//
// The paper names activation sub-blocks and 8-bit quantised activations; the
// choice of ReLU, the shift-based scale, the rounding and the saturation are
// this design's own.
module act_quant
  import accel_pkg::*;
#(
  parameter int unsigned LANES   = DEF_LANES,
  parameter int unsigned DATA_W  = DEF_DATA_W,
  parameter int unsigned ACC_W   = DEF_ACC_W
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid,
  input  logic                                relu,
  input  logic [SHIFT_W-1:0]                  shift,
  input  logic signed [LANES-1:0][ACC_W-1:0]  in,
  output logic                                out_valid,
  output logic signed [LANES-1:0][DATA_W-1:0] out
);

  localparam logic signed [ACC_W:0] QMAX = (ACC_W+1)'((1 << (DATA_W - 1)) - 1);
  localparam logic signed [ACC_W:0] QMIN = -(ACC_W+1)'(1 << (DATA_W - 1));

  logic signed [LANES-1:0][DATA_W-1:0] q;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [ACC_W:0] v, r;
      v = (ACC_W+1)'($signed(in[l]));  // an element of a packed array is unsigned
      if (relu && v < 0) v = '0;
      // round half up: add half an LSB of the result before shifting
      if (shift != '0) v = v + ((ACC_W+1)'(1) <<< (shift - 1'b1));
      r = v >>> shift;
      if (r > QMAX)      q[l] = QMAX[DATA_W-1:0];
      else if (r < QMIN) q[l] = QMIN[DATA_W-1:0];
      else               q[l] = r[DATA_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out <= q;
    end
  end

endmodule
