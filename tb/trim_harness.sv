// trim_harness: reusable test bench around one trim_top of kernel size K.
//
// It models main memory (an ifmap plane and a K x K kernel, reads answered
// in the same cycle) and offers the task conv_run(hi, wi), which loads
// random data, starts the array, and checks every output against a direct
// convolution, the number of outputs, the memory-access count
// H_I*W_I + OV (TrIM model: OV = (W_I-K-1)(K-1)(H_I-K) for W_I < 2K, else
// (K-1)^2 (H_I-K)) and the latency K + H_O*W_O from the first multiply to
// the last registered output. The task tiled_run(hi, wi, ke) runs a
// ke x ke kernel as ceil(ke/K)^2 tile passes and checks the outputs and the
// number of passes (the memory junk past the kernel edge must be ignored).
// checks and failures accumulate.
module trim_harness
  import trim_pkg::*;
#(
  parameter int unsigned K = K_DEF
) ();

  localparam int HMAX = H_I_MAX_DEF;
  localparam int WMAX = W_I_MAX_DEF;
  localparam int KEM  = K_E_MAX_DEF;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  start = 1'b0;
  mode_e mode = MODE_CONV;
  idx_t  ifmap_h = '0, ifmap_w = '0, fc_vectors = '0;
  logic  busy, done, wt_rd_en, out_valid;
  idx_t  wt_rd_row;
  idx_t  wt_rd_col;
  idx_t  kernel_size = idx_t'(K);
  data_t wt_rd_data [K];
  logic  in_rd_en  [K][K];
  idx_t  in_rd_row [K][K];
  idx_t  in_rd_col [K][K];
  data_t in_rd_data [K][K];
  psum_t out_data;

  trim_top #(.K(K)) dut (.*);

  always #5 clk = ~clk;

  data_t ifmap [HMAX][WMAX];
  data_t wgt   [KEM][KEM];

  always_comb begin
    for (int j = 0; j < int'(K); j++)
      if (int'(wt_rd_row) < int'(kernel_size) && int'(wt_rd_col) + j < int'(kernel_size))
        wt_rd_data[j] = wgt[int'(wt_rd_row)][int'(wt_rd_col) + j];
      else
        wt_rd_data[j] = data_t'(77 - j);   // junk past the kernel edge
    for (int i = 0; i < int'(K); i++)
      for (int j = 0; j < int'(K); j++)
        in_rd_data[i][j] = ifmap[int'(in_rd_row[i][j]) % HMAX][int'(in_rd_col[i][j]) % WMAX];
  end

  int checks = 0, failures = 0;
  longint cyc = 0;
  int n_reads, n_out, n_wload;
  longint first_rd, last_out;
  psum_t expect_q [$];
  int last_reads, last_latency;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL K=%0d: %s", K, what);
    end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      for (int i = 0; i < int'(K); i++)
        for (int j = 0; j < int'(K); j++)
          if (in_rd_en[i][j]) begin
            n_reads++;
            if (first_rd < 0) first_rd = cyc;
          end
      if (wt_rd_en) n_wload++;
      if (out_valid) begin
        last_out = cyc;
        n_out++;
        if (expect_q.size() == 0) begin
          failures++;
        end else begin
          psum_t e;
          e = expect_q.pop_front();
          if (out_data != e) begin
            failures++;
            if (failures < 20) $display("FAIL K=%0d: output %0d got %0d expected %0d", K, n_out - 1, out_data, e);
          end
          checks++;
        end
      end
    end
  end

  task automatic conv_run(input int hi, input int wi);
    int ho, wo, exp_ma, exp_lat, ov;
    if (!rst_n) begin
      repeat (3) @(negedge clk);
      rst_n = 1'b1;
    end
    mode        = MODE_CONV;
    kernel_size = idx_t'(K);
    ifmap_h     = idx_t'(hi);
    ifmap_w     = idx_t'(wi);
    for (int i = 0; i < int'(K); i++)
      for (int j = 0; j < int'(K); j++) wgt[i][j] = data_t'($urandom);
    for (int r = 0; r < hi; r++)
      for (int c = 0; c < wi; c++) ifmap[r][c] = data_t'($urandom);
    ho = hi - int'(K) + 1;
    wo = wi - int'(K) + 1;
    for (int r = 0; r < ho; r++)
      for (int c = 0; c < wo; c++) begin
        psum_t s = '0;
        for (int a = 0; a < int'(K); a++)
          for (int b = 0; b < int'(K); b++)
            s += psum_t'(ifmap[r+a][c+b]) * psum_t'(wgt[a][b]);
        expect_q.push_back(s);
      end
    ov = (wi < 2*int'(K)) ? (wi - int'(K) - 1) * (int'(K) - 1) * (hi - int'(K))
                          : (int'(K) - 1) * (int'(K) - 1) * (hi - int'(K));
    exp_ma  = hi * wi + ov;
    exp_lat = int'(K) + ho * wo;
    n_reads = 0; n_out = 0; first_rd = -1; last_out = -1;
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    @(negedge clk);
    last_reads   = n_reads;
    last_latency = int'((last_out - 1) - first_rd);
    check(n_out == ho * wo, $sformatf("%0dx%0d: %0d outputs, expected %0d", hi, wi, n_out, ho * wo));
    check(expect_q.size() == 0, "all outputs delivered");
    expect_q.delete();
    check(n_reads == exp_ma, $sformatf("%0dx%0d: %0d reads, expected %0d", hi, wi, n_reads, exp_ma));
    check(last_latency == exp_lat, $sformatf("%0dx%0d: latency %0d, expected %0d", hi, wi, last_latency, exp_lat));
    $display("K=%0d ifmap %0dx%0d: outputs=%0d memory accesses=%0d (model %0d) latency=%0d (model %0d) TPE=%0.3f",
             K, hi, wi, n_out, n_reads, exp_ma, last_latency, exp_lat,
             2.0 * real'(ho * wo) / real'(last_latency));
  endtask

  task automatic tiled_run(input int hi, input int wi, input int ke);
    int ho, wo, nt;
    if (!rst_n) begin
      repeat (3) @(negedge clk);
      rst_n = 1'b1;
    end
    mode        = MODE_CONV;
    kernel_size = idx_t'(ke);
    ifmap_h     = idx_t'(hi);
    ifmap_w     = idx_t'(wi);
    nt          = (ke + int'(K) - 1) / int'(K);
    for (int i = 0; i < KEM; i++)
      for (int j = 0; j < KEM; j++) wgt[i][j] = data_t'($urandom);
    for (int r = 0; r < hi; r++)
      for (int c = 0; c < wi; c++) ifmap[r][c] = data_t'($urandom);
    ho = hi - ke + 1;
    wo = wi - ke + 1;
    for (int r = 0; r < ho; r++)
      for (int c = 0; c < wo; c++) begin
        psum_t s = '0;
        for (int a = 0; a < ke; a++)
          for (int b = 0; b < ke; b++)
            s += psum_t'(ifmap[r+a][c+b]) * psum_t'(wgt[a][b]);
        expect_q.push_back(s);
      end
    n_reads = 0; n_out = 0; n_wload = 0; first_rd = -1; last_out = -1;
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    @(negedge clk);
    last_reads   = n_reads;
    last_latency = int'((last_out - 1) - first_rd);
    check(n_out == ho * wo, $sformatf("%0dx%0d kernel %0d: %0d outputs, expected %0d", hi, wi, ke, n_out, ho * wo));
    check(expect_q.size() == 0, "all outputs delivered");
    expect_q.delete();
    check(n_wload == nt * nt * int'(K), $sformatf("kernel %0d: %0d weight-load cycles, expected %0d passes", ke, n_wload, nt * nt));
    $display("K=%0d kernel %0dx%0d ifmap %0dx%0d: passes=%0d outputs=%0d memory accesses=%0d cycles=%0d",
             K, ke, ke, hi, wi, nt * nt, n_out, n_reads, last_latency);
  endtask

endmodule
