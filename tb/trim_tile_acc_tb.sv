// trim_tile_acc_tb: checks the tile-pass accumulator against a reference sum.
//
// The testbench plays the controller and adder tree: it runs jobs of T
// passes (T = 1, 2, 3, 4, 9, 16) of N outputs each, with random gaps
// between valid outputs, pulsing tile_start before every pass and setting
// tile_first/tile_last. It checks that outputs appear only in the last
// pass, in the same cycle as the input (no added latency), that each is
// the sum of the matching outputs of all passes, and that a single-pass
// job passes its inputs straight through. One job fills the whole buffer
// of the default size (DEPTH = 253*253 outputs).
module trim_tile_acc_tb;
  import trim_pkg::*;

  localparam int DEPTH = (H_I_MAX_DEF - K_DEF) * (W_I_MAX_DEF - K_DEF);

  logic  clk = 1'b0, rst_n = 1'b0;
  logic  tile_start = 1'b0, tile_first = 1'b0, tile_last = 1'b0;
  logic  in_valid = 1'b0;
  psum_t in_data = '0;
  logic  out_valid;
  psum_t out_data;

  trim_tile_acc dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  psum_t ref_sum [];

  task automatic job(input int t, input int n, input bit gaps);
    int seen;
    ref_sum = new[n];
    foreach (ref_sum[k]) ref_sum[k] = '0;
    seen = 0;
    for (int p = 0; p < t; p++) begin
      tile_first = (p == 0);
      tile_last  = (p == t - 1);
      tile_start = 1'b1;
      repeat (2) @(negedge clk);
      tile_start = 1'b0;
      for (int k = 0; k < n; k++) begin
        if (gaps) begin
          in_valid = 1'b0;
          repeat ($urandom % 3) begin
            #1;
            checks++;
            if (out_valid) failures++;
            @(negedge clk);
          end
        end
        in_valid = 1'b1;
        in_data  = psum_t'($urandom) >>> ($urandom % 16);
        ref_sum[k] += in_data;
        #1;
        checks++;
        if (out_valid != (p == t - 1)) begin
          failures++;
          if (failures < 10) $display("FAIL job %0dx%0d pass %0d out_valid %b", t, n, p, out_valid);
        end
        if (p == t - 1) begin
          seen++;
          checks++;
          if (out_data != ref_sum[k]) begin
            failures++;
            if (failures < 10) $display("FAIL job %0dx%0d out %0d: %0d expected %0d", t, n, k, out_data, ref_sum[k]);
          end
        end
        @(negedge clk);
      end
      in_valid = 1'b0;
      @(negedge clk);
    end
    checks++;
    if (seen != n) failures++;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    job(1, 50, 1'b1);
    job(2, 37, 1'b1);
    job(3, 100, 1'b0);
    job(4, 64, 1'b1);
    job(1, 20, 1'b0);
    job(9, 80, 1'b1);
    job(16, 30, 1'b0);
    job(2, DEPTH, 1'b0);   // whole buffer
    job(4, 5, 1'b1);       // short job after a long one
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
