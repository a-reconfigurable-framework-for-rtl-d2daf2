// tile_buffer_tb: self-checking test of the ping-pong tile buffer.
//
// Streams tiles of random length into the buffer while a reader consumes them,
// and checks: the words read back from the compute bank, the full flags and
// bank pointers, that a third tile is held back (wr_ready low) while both banks
// are full and enters as soon as one is released, that a tile is written while
// the other bank is being read (the overlap double buffering exists for), and
// that a tile longer than a bank raises `overflow` and keeps its first DEPTH words.
module tile_buffer_tb;
  import accel_pkg::*;
  localparam int WORD_W = 64, DEPTH = 32, AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_valid = 0, wr_ready, wr_last = 0, overflow;
  logic [WORD_W-1:0] wr_data = '0, rd_data;
  logic rd_full, rd_en = 0, release_bank = 0;
  logic [AW-1:0] rd_addr = '0;
  logic [1:0] bank_full;
  logic fill_bank, comp_bank;

  tile_buffer #(.WORD_W(WORD_W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int backpressure_cycles = 0, overlap_cycles = 0, overflows = 0;
  logic [WORD_W-1:0] tiles [$][$];   // tiles written, oldest first
  bit reading = 0;

  always @(posedge clk) if (rst_n) begin
    if (wr_valid && !wr_ready) backpressure_cycles++;
    if (wr_valid && wr_ready && reading) overlap_cycles++;
    if (overflow) overflows++;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // writer: sends `n` words, the last with wr_last
  task automatic send_tile(int n);
    logic [WORD_W-1:0] t [$];
    for (int i = 0; i < n; i++) begin
      logic [WORD_W-1:0] w;
      w = {$urandom, $urandom};
      wr_valid = 1; wr_data = w; wr_last = (i == n - 1);
      @(posedge clk);
      while (!wr_ready) @(posedge clk);
      #1;
      if (i < DEPTH) t.push_back(w);
    end
    wr_valid = 0; wr_last = 0;
    tiles.push_back(t);
  endtask

  // reader: waits for a full compute bank, reads it back, releases it
  task automatic read_tile();
    logic [WORD_W-1:0] t [$];
    while (!rd_full) @(negedge clk);
    wait (tiles.size() > 0);
    t = tiles.pop_front();
    reading = 1;
    for (int i = 0; i < t.size(); i++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = AW'(i);
      @(negedge clk);
      rd_en = 0;
      check(rd_data === t[i], $sformatf("word %0d of tile", i));
      repeat (2) @(negedge clk);   // slow reader so that the writer runs ahead
    end
    reading = 0;
    release_bank = 1;
    @(negedge clk);
    release_bank = 0;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(bank_full == 2'b00 && wr_ready && !rd_full, "empty after reset");

    // two tiles fill both banks; the third must wait
    send_tile(5);
    @(negedge clk);
    check(bank_full == 2'b01 && fill_bank == 1 && comp_bank == 0 && rd_full, "bank 0 full");
    send_tile(DEPTH);
    @(negedge clk);
    check(bank_full == 2'b11 && !wr_ready, "both banks full, back-pressure");
    fork
      send_tile(7);
      begin
        repeat (10) @(negedge clk);
        check(bank_full == 2'b11 && fill_bank == 0, "third tile held back");
        read_tile();   // frees bank 0, third tile goes in
        @(negedge clk);
        check(comp_bank == 1, "compute bank moved to 1");
      end
    join
    check(backpressure_cycles > 5, "back-pressure observed");

    // streaming: writer and reader concurrently over many tiles
    fork
      for (int k = 0; k < 20; k++) send_tile(1 + $urandom % DEPTH);
      for (int k = 0; k < 22; k++) read_tile();
    join
    check(overlap_cycles > 0, "tile written while the other bank was read");

    // overflow: a tile longer than a bank
    fork
      send_tile(DEPTH + 3);
      read_tile();
    join
    check(overflows == 3, $sformatf("three overflow pulses, saw %0d", overflows));
    @(negedge clk);
    check(bank_full == 2'b00, "all banks released");
    $display("back-pressure %0d, overlap %0d cycles", backpressure_cycles, overlap_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
