// mac_array_tb: self-checking test of the MAC lanes.
//
// Drives random signed 8-bit operands in windows of random length, in both
// modes, with idle cycles in between, and compares every lane's accumulator
// after every cycle with a sum or maximum kept in the bench.
module mac_array_tb;
  import accel_pkg::*;
  localparam int LANES = 8, DATA_W = 8, ACC_W = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic valid = 0, first = 0;
  mode_e mode = MODE_CONV;
  logic signed [LANES-1:0][DATA_W-1:0] act, wgt;
  logic signed [LANES-1:0][ACC_W-1:0]  acc;

  mac_array #(.LANES(LANES), .DATA_W(DATA_W), .ACC_W(ACC_W)) dut (.*);

  int checks = 0, failures = 0;
  longint model [LANES];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    act = '0; wgt = '0;
    foreach (model[l]) model[l] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int win = 0; win < 200; win++) begin
      int len;
      len = 1 + $urandom % 20;
      mode = mode_e'(win % 3 == 2);
      for (int i = 0; i < len; i++) begin
        valid = ($urandom % 5) != 0 || i == 0;
        first = (i == 0);
        for (int l = 0; l < LANES; l++) begin
          act[l] = DATA_W'($urandom);
          wgt[l] = DATA_W'($urandom);
          if (i % 7 == 3) begin act[l] = -128; wgt[l] = -128; end  // extreme products
        end
        if (valid) begin
          for (int l = 0; l < LANES; l++) begin
            longint a, w;
            a = $signed(act[l]);
            w = $signed(wgt[l]);
            if (mode == MODE_MAXPOOL) model[l] = (first || a > model[l]) ? a : model[l];
            else                      model[l] = (first ? 0 : model[l]) + a * w;
          end
        end
        @(negedge clk);
        for (int l = 0; l < LANES; l++) begin
          checks++;
          if ($signed(acc[l]) != model[l]) begin
            failures++;
            if (failures < 10) $display("lane %0d: acc %0d, expected %0d", l, $signed(acc[l]), model[l]);
          end
        end
      end
      valid = 0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
