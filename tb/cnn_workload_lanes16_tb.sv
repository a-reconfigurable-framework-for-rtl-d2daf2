// cnn_workload_lanes16_tb: classifies two random 32x32x3 images with a small
// ResNet-like network on a core built with 16 MAC lanes (LANES = 16, a 128-bit
// stream word) instead of the default 8, with 8-bit data. The network, the
// host steps and the checks are in cnn_workload_run; this module adds the
// watchdog and prints the result. The scores must equal those of the 8-lane
// core on the same images, in about half the cycles.
module cnn_workload_lanes16_tb;
  int checks, failures;
  bit done;
  logic clk = 0;
  always #5 clk = ~clk;

  cnn_workload_run #(.DW(8), .LN(16), .IMAGES(2)) run (.checks(checks), .failures(failures), .done(done));

  initial begin
    fork
      wait (done);
      begin
        repeat (5000000) @(posedge clk);
        failures++;
        $display("watchdog expired");
      end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
