// trim_adder_tree_tb: self-checking test of the column adder tree.
//
// Feeds random psums to the default tree (K = 3) and to a K = 7 tree and
// checks that one cycle later the registered sum equals the plain sum of
// the inputs, with the valid bit delayed by the same cycle.
module trim_adder_tree_tb;
  import trim_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  psum_t psum3 [3];
  psum_t psum7 [7];
  logic  v3, v7;
  psum_t s3, s7;

  trim_adder_tree u3 (.clk, .rst_n, .in_valid, .psum(psum3), .out_valid(v3), .sum(s3));
  trim_adder_tree #(.K(7)) u7 (.clk, .rst_n, .in_valid, .psum(psum7), .out_valid(v7), .sum(s7));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    foreach (psum3[j]) psum3[j] = '0;
    foreach (psum7[j]) psum7[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 1000; n++) begin
      psum_t e3, e7;
      logic  ev;
      @(negedge clk);
      in_valid = 1'($urandom % 2);
      e3 = '0; e7 = '0;
      foreach (psum3[j]) begin psum3[j] = psum_t'($signed($urandom)) >>> 4; e3 += psum3[j]; end
      foreach (psum7[j]) begin psum7[j] = psum_t'($signed($urandom)) >>> 4; e7 += psum7[j]; end
      ev = in_valid;
      @(posedge clk);
      #1;
      checks += 2;
      if (s3 != e3 || v3 != ev) begin
        failures++;
        if (failures < 10) $display("FAIL K=3: %0d expected %0d", s3, e3);
      end
      if (s7 != e7 || v7 != ev) begin
        failures++;
        if (failures < 10) $display("FAIL K=7: %0d expected %0d", s7, e7);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
