// cnn_workload_tb: classifies two random 32x32x3 images with a small ResNet-like
// network with 8-bit activations and weights, the core's default width. The network, the host steps and the checks are in
// cnn_workload_run; this module adds the watchdog and prints the result.
module cnn_workload_tb;
  int checks, failures;
  bit done;
  logic clk = 0;
  always #5 clk = ~clk;

  cnn_workload_run #(.DW(8), .IMAGES(2)) run (.checks(checks), .failures(failures), .done(done));

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
