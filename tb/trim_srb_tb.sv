// trim_srb_tb: self-checking test of the Shift Register Buffer.
//
// Shifts random values through the default-depth SRB with random pauses of
// the enable and checks every stage against a queue of the values shifted
// in: stage k holds the (k+1)-th most recent value shifted in. Also checks
// reset clears the buffer.
module trim_srb_tb;
  import trim_pkg::*;

  localparam int DEPTH = W_I_MAX_DEF - K_DEF - 1;

  logic  clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  data_t d = '0;
  data_t q [DEPTH];

  trim_srb dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  data_t hist [$];

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < DEPTH; k++) begin
      checks++;
      if (q[k] != '0) failures++;
    end
    for (int k = 0; k < DEPTH; k++) hist.push_front('0);
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      en = ($urandom % 8) != 0;
      d  = data_t'($urandom);
      @(posedge clk);
      if (en) begin
        hist.push_front(d);
        void'(hist.pop_back());
      end
      #1;
      for (int k = 0; k < DEPTH; k++) begin
        checks++;
        if (q[k] != hist[k]) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d stage %0d: %0d expected %0d", n, k, q[k], hist[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
