// tile_buffer: double-buffered (ping-pong) on-chip tile buffer.
//
// Two banks of DEPTH words. The fill side writes a stream of words into the
// fill bank at consecutive addresses; the word with wr_last closes the tile:
// the bank is marked full and filling moves to the other bank. The compute side
// reads the compute bank at random addresses; `release` marks that bank empty
// again and moves computing to the other bank. While the compute side works on
// one bank the next tile can be streamed into the other, which is how transfers
// overlap with computation. A full fill bank deasserts wr_ready (back-pressure)
// until the compute side releases it. A word written past DEPTH is dropped and
// raises `overflow` for one cycle: the tile was too large for the buffer.
//
// Timing: rd_data follows rd_en by one cycle and holds until the next read.
// A bank released in a cycle can be written from the next cycle on.
//
// The paper asks for tiles held in on-chip block RAM and for double buffering of
// tile transfers against computation; the two-bank scheme, the full flags and
// the stream-order fill are this design's own realisation of that.
module tile_buffer
  import accel_pkg::*;
#(
  parameter int unsigned WORD_W = DEF_LANES * DEF_DATA_W,
  parameter int unsigned DEPTH  = DEF_ACT_DEPTH,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // fill side
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [WORD_W-1:0] wr_data,
  input  logic              wr_last,
  output logic              overflow,
  // compute side
  output logic              rd_full,
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output logic [WORD_W-1:0] rd_data,
  input  logic              release_bank,
  // status
  output logic [1:0]        bank_full,
  output logic              fill_bank,
  output logic              comp_bank
);

  logic [WORD_W-1:0] mem [2*DEPTH];
  logic [AW:0]       wr_ptr;   // one bit wider to detect overflow
  logic              wr_fire;

  assign wr_ready = !bank_full[fill_bank];
  assign wr_fire  = wr_valid && wr_ready;
  assign rd_full  = bank_full[comp_bank];

  always_ff @(posedge clk) begin
    if (wr_fire && !wr_ptr[AW]) mem[{fill_bank, wr_ptr[AW-1:0]}] <= wr_data;
    if (rd_en)                  rd_data <= mem[{comp_bank, rd_addr}];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_full <= '0;
      fill_bank <= 1'b0;
      comp_bank <= 1'b0;
      wr_ptr    <= '0;
      overflow  <= 1'b0;
    end else begin
      overflow <= wr_fire && wr_ptr[AW];
      if (wr_fire) begin
        if (wr_last) begin
          bank_full[fill_bank] <= 1'b1;
          fill_bank            <= !fill_bank;
          wr_ptr               <= '0;
        end else if (!wr_ptr[AW]) begin
          wr_ptr <= wr_ptr + 1'b1;
        end
      end
      if (release_bank && bank_full[comp_bank]) begin
        bank_full[comp_bank] <= 1'b0;
        comp_bank            <= !comp_bank;
      end
    end
  end

endmodule
