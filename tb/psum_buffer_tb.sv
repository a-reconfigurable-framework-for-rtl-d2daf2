// psum_buffer_tb: self-checking test of the partial-sum buffer.
//
// Writes random entries while reading others, checks each read one cycle after
// it is issued against a copy kept in the bench, and checks that read data
// holds while no read is issued and that a same-address read returns the old
// contents.
module psum_buffer_tb;
  import accel_pkg::*;
  localparam int LANES = 8, ACC_W = 32, DEPTH = 64, AW = $clog2(DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic signed [LANES-1:0][ACC_W-1:0] wr_data, rd_data;

  psum_buffer #(.LANES(LANES), .ACC_W(ACC_W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [LANES*ACC_W-1:0] model [DEPTH];

  function automatic logic [LANES*ACC_W-1:0] rnd();
    logic [LANES*ACC_W-1:0] v;
    for (int i = 0; i < LANES; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [LANES*ACC_W-1:0] expd;
    wr_data = '0;
    // fill every entry
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(i); wr_data = rnd(); model[i] = wr_data;
    end
    @(negedge clk);
    wr_en = 0;
    for (int t = 0; t < 2000; t++) begin
      wr_en   = $urandom % 2;
      wr_addr = AW'($urandom);
      wr_data = rnd();
      rd_en   = 1;
      rd_addr = (t % 5 == 0) ? wr_addr : AW'($urandom);
      expd    = model[rd_addr];            // old contents on a same-address write
      if (wr_en) model[wr_addr] = wr_data;
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      checks++;
      if (rd_data !== expd) begin
        failures++;
        if (failures < 10) $display("read %0d: got %h expected %h", rd_addr, rd_data, expd);
      end
      @(negedge clk);
      checks++;
      if (rd_data !== expd) failures++;   // holds without a read
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
