// out_fifo_tb: self-checking test of the output FIFO.
//
// Random pushes and pops (never pushing when full nor popping when empty, as
// the assertions require) against a queue in the bench; checks the data order,
// `full`, `empty` and `count` every cycle, and that the FIFO really fills.
module out_fifo_tb;
  import accel_pkg::*;
  localparam int WIDTH = 65, DEPTH = 8, AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push = 0, pop = 0, full, empty;
  logic [WIDTH-1:0] wr_data = '0, rd_data;
  logic [AW:0] count;

  out_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, times_full = 0;
  logic [WIDTH-1:0] q [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      int bias;
      bias = (t / 500) % 2;   // phases that fill and that drain
      checks++;
      if (full !== (q.size() == DEPTH) || empty !== (q.size() == 0) || int'(count) != q.size()) begin
        failures++;
        if (failures < 10) $display("flags: full %0b empty %0b count %0d, model %0d", full, empty, count, q.size());
      end
      if (full) times_full++;
      if (!empty) begin
        checks++;
        if (rd_data !== q[0]) begin
          failures++;
          if (failures < 10) $display("head %h expected %h", rd_data, q[0]);
        end
      end
      push = !full && ($urandom % 4 < (bias ? 3 : 1));
      pop  = !empty && ($urandom % 4 < (bias ? 1 : 3));
      wr_data = {$urandom, $urandom, 1'($urandom)};
      @(negedge clk);
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(wr_data);
      push = 0; pop = 0;
    end
    checks++;
    if (times_full == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
