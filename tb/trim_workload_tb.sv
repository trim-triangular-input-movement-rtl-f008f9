// trim_workload_tb: runs the design-space workloads of the TrIM evaluation.
//
// Kernel sizes K = 3, 5 and 7, each on square ifmaps of 16, 32, 64, 128 and
// 256, plus one 226 x 226 plane (a 224 x 224 VGG-16 layer with its
// one-pixel zero border supplied by the host) on the K = 3 array. Each run
// checks the outputs against a direct convolution and the measured memory
// accesses and latency against the analytical model (Eqs. 12-13 and 14);
// the printed TPE is 2*H_O*W_O / latency, the throughput per PE of Eq. 16.
// The same 5 x 5 and 7 x 7 kernels on the same ifmap sizes are also run on
// the 3 x 3 array as tile passes (4 and 9 passes), with the outputs
// checked against a direct convolution.
module trim_workload_tb;

  trim_harness #(.K(3)) h3 ();
  trim_harness #(.K(5)) h5 ();
  trim_harness #(.K(7)) h7 ();

  int sizes [5] = '{16, 32, 64, 128, 256};

  initial begin
    int checks, failures;
    fork
      begin
        foreach (sizes[n]) h3.conv_run(sizes[n], sizes[n]);
        h3.conv_run(226, 226);
        foreach (sizes[n]) h3.tiled_run(sizes[n], sizes[n], 5);
        foreach (sizes[n]) h3.tiled_run(sizes[n], sizes[n], 7);
      end
      foreach (sizes[n]) h5.conv_run(sizes[n], sizes[n]);
      foreach (sizes[n]) h7.conv_run(sizes[n], sizes[n]);
    join
    checks   = h3.checks + h5.checks + h7.checks;
    failures = h3.failures + h5.failures + h7.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (2000000) @(posedge h3.clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", h3.checks + h5.checks + h7.checks,
             h3.failures + h5.failures + h7.failures + 1);
    $finish;
  end

endmodule
