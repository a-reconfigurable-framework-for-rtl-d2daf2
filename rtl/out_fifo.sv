// out_fifo: output staging FIFO of the dataflow pipeline.
//
// A synchronous FIFO of DEPTH words, used twice: as the layer engine's result
// queue (8 words) and between the engine and the output stream (16 words). The
// pipeline pushes one word per output pixel and channel group; the output
// stream pops it when the receiver is ready. When the receiver is slow the
// FIFOs fill and the engine is held back. Each word carries a `last` bit that
// becomes the stream's end-of-job marker.
//
// Timing: show-ahead: while `empty` is low, rd_data is the oldest word, from the
// cycle after it was pushed. A push to a full FIFO and a pop from an empty one
// are ignored, and assertions flag them.
//
// The paper's controller streams outputs back to the host; the FIFO and its
// depth are this design's choice.
module out_fifo
  import accel_pkg::*;
#(
  parameter int unsigned WIDTH = DEF_LANES * DEF_DATA_W + 1,
  parameter int unsigned DEPTH = DEF_FIFO_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic [AW:0]      count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_push, do_pop;

  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
