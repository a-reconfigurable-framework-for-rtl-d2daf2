// act_quant_tb: self-checking test of the activation sub-block.
//
// Random accumulator values (uniform and small, to hit both saturation and the
// in-range path, plus exact halfway cases for the rounding), random ReLU
// setting and shift; the expected INT8 is computed in the bench with 64-bit
// arithmetic and compared one cycle after in_valid, together with out_valid.
module act_quant_tb;
  import accel_pkg::*;
  localparam int LANES = 8, DATA_W = 8, ACC_W = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, relu = 0, out_valid;
  logic [SHIFT_W-1:0] shift = '0;
  logic signed [LANES-1:0][ACC_W-1:0]  in;
  logic signed [LANES-1:0][DATA_W-1:0] out;

  act_quant #(.LANES(LANES), .DATA_W(DATA_W), .ACC_W(ACC_W)) dut (.*);

  int checks = 0, failures = 0;

  function automatic longint ref_q(longint v, bit r, int s);
    if (r && v < 0) v = 0;
    if (s > 0) v = (v + (longint'(1) << (s - 1))) >>> s;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_v [LANES];
    in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      in_valid = 1;
      relu  = $urandom % 2;
      shift = SHIFT_W'($urandom % 20);
      for (int l = 0; l < LANES; l++) begin
        longint v;
        case ($urandom % 4)
          0: v = longint'($signed(32'($urandom)));
          1: v = longint'($signed(32'($urandom))) >>> 16;
          2: v = (longint'($urandom % 512) - 256) <<< shift;
          default: v = ((longint'($urandom % 64) - 32) <<< shift) + ((shift > 0) ? (longint'(1) << (shift - 1)) : 0);
        endcase
        in[l] = ACC_W'(v);
        exp_v[l] = ref_q(longint'($signed(in[l])), relu, int'(shift));
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (longint'($signed(out[l])) != exp_v[l]) begin
          failures++;
          if (failures < 10) $display("in %0d relu %0d shift %0d: got %0d expected %0d",
                                      $signed(in[l]), relu, shift, $signed(out[l]), exp_v[l]);
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
