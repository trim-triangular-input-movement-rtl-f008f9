// trim_top_tb: end-to-end test of the TrIM array at its default sizes
// (K = 3, ifmaps up to 256 x 256).
//
// The testbench plays the main memory: it holds a random ifmap and kernel,
// answers the weight and input read ports in the same cycle, and counts
// every input read. For each run it checks
//   - every output activation against a direct convolution (Eq. 1 with
//     one ifmap and one kernel) or, in FC mode, a direct dot product;
//   - the number of outputs, H_O*W_O (fc: vectors);
//   - memory accesses: H_I*W_I + OV, OV = (W_I-K-1)(K-1)(H_I-K) for
//     W_I < 2K and (K-1)^2 (H_I-K) otherwise (fc: K*K per vector);
//   - latency: K + H_O*W_O cycles from the first multiply to the cycle the
//     last output is registered;
//   - the K-cycle weight load.
// For the 5x5 worked example (ifmap 1..25) it also checks, cycle by cycle,
// the input every PE uses and the value every SRB takes in.
// The sizes cover the 5x5 worked example, the narrow case W_I <= 2K where
// diagonal inputs come straight from PEs, the wide case where they come
// from SRB taps, non-square ifmaps, FC mode and the full 256 x 256 ifmap.
// Larger and smaller kernels (K_E = 1, 2, 5, 6, 7, 11) run as tile passes;
// for them the outputs, the number of passes (weight loads) and the
// absence of reads outside the ifmap are checked, and the weight memory
// returns non-zero junk past the kernel edge so that the zero padding is
// really exercised.
// Each mechanism (external/right/diagonal inputs, SRB and PE diagonal
// sources, re-fetches, idle PEs, weight load, FC mode, mode switch, tile
// passes, padded weights, skipped padded reads) is counted and must occur.
module trim_top_tb;
  import trim_pkg::*;

  localparam int K    = K_DEF;
  localparam int HMAX = H_I_MAX_DEF;
  localparam int WMAX = W_I_MAX_DEF;
  localparam int KEM  = K_E_MAX_DEF;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  start = 1'b0;
  mode_e mode = MODE_CONV;
  idx_t  ifmap_h = '0, ifmap_w = '0, fc_vectors = '0;
  logic  busy, done, wt_rd_en, out_valid;
  idx_t  wt_rd_row, wt_rd_col;
  idx_t  kernel_size = idx_t'(K);
  data_t wt_rd_data [K];
  logic  in_rd_en  [K][K];
  idx_t  in_rd_row [K][K];
  idx_t  in_rd_col [K][K];
  data_t in_rd_data [K][K];
  psum_t out_data;

  trim_top dut (.*);

  always #5 clk = ~clk;

  // ------------------------------------------------------ memory model
  data_t ifmap [HMAX][WMAX];
  data_t fcin  [512][K*K];
  data_t wgt   [KEM][KEM];

  always_comb begin
    for (int j = 0; j < K; j++)
      if (int'(wt_rd_row) < int'(kernel_size) && int'(wt_rd_col) + j < int'(kernel_size))
        wt_rd_data[j] = wgt[int'(wt_rd_row)][int'(wt_rd_col) + j];
      else
        wt_rd_data[j] = data_t'(91 + j);   // junk past the kernel edge
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++)
        if (mode == MODE_FC)
          in_rd_data[i][j] = fcin[int'(in_rd_row[i][j]) % 512][int'(in_rd_col[i][j]) % (K*K)];
        else
          in_rd_data[i][j] = ifmap[int'(in_rd_row[i][j]) % HMAX][int'(in_rd_col[i][j]) % WMAX];
  end

  // ------------------------------------------------------ bookkeeping
  int checks = 0, failures = 0;
  longint cyc = 0;
  int n_reads, n_out, n_wload;
  longint first_rd, last_out;
  psum_t expect_q [$];

  // Worked 5x5 example (ifmap values 1..25 in raster order): the input
  // each PE uses in cycle c (c = 1 is the first multiply) and the value
  // each SRB takes in at the end of cycle c, as printed for that example.
  // 0 marks a don't-care cycle.
  bit    fig5;
  int    fig5_checks;
  const int SRB0_FIG [12] = '{0, 0, 6, 7, 8, 11, 12, 13, 16, 0, 0, 0};
  const int SRB1_FIG [12] = '{0, 0, 0, 11, 12, 13, 16, 17, 18, 0, 0, 0};
  data_t tap_il [K][K];
  data_t tap_srb [K];
  for (genvar i = 0; i < K; i++) begin : g_tap
    for (genvar j = 0; j < K; j++) begin : g_tj
      assign tap_il[i][j] = dut.u_array.i_l[i][j];
    end
    assign tap_srb[i] = dut.u_array.srb_q[i][0];
  end

  // mechanism counters
  longint m_ext, m_right, m_diag_srb, m_diag_pe, m_idle, m_wload, m_fc,
          m_refetch, m_switch, m_full, m_tiled, m_wpad, m_skip;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      for (int i = 0; i < K; i++)
        for (int j = 0; j < K; j++)
          if (in_rd_en[i][j]) begin
            n_reads++;
            if (first_rd < 0) first_rd = cyc;
            if (mode == MODE_CONV) begin
              // a read request must name a real ifmap element
              if (int'(in_rd_row[i][j]) >= int'(ifmap_h) || int'(in_rd_col[i][j]) >= int'(ifmap_w)) begin
                failures++;
                $display("FAIL: read outside ifmap (%0d,%0d)", in_rd_row[i][j], in_rd_col[i][j]);
              end
            end
          end
      if (wt_rd_en) begin
        n_wload++; m_wload++;
        for (int j = 0; j < K; j++) if (!dut.u_ctrl.wt_mask[j]) m_wpad++;
      end
      if (out_valid) begin
        last_out = cyc;
        n_out++;
        if (expect_q.size() == 0) begin
          failures++;
          $display("FAIL: unexpected output %0d", out_data);
        end else begin
          psum_t e;
          e = expect_q.pop_front();
          check(out_data == e, $sformatf("output %0d: got %0d expected %0d", n_out - 1, out_data, e));
        end
      end
      // worked example: state after the edge that ended cycle c
      if (fig5 && first_rd >= 0) begin
        longint c;
        c = cyc - first_rd - 1;
        if (c >= 1 && c <= 12) begin
          for (int i = 0; i < K; i++) begin
            int st;
            st = int'(c) - 1 - i;
            if (st >= 0 && st < 9)
              for (int j = 0; j < K; j++) begin
                int v;
                v = (st / 3 + i) * 5 + st % 3 + j + 1;
                fig5_checks++;
                check(int'(tap_il[i][j]) == v, $sformatf("example cycle %0d PE(%0d,%0d) used %0d, expected %0d",
                                                          c, i, j, tap_il[i][j], v));
              end
          end
          if (SRB0_FIG[int'(c) - 1] != 0) begin
            fig5_checks++;
            check(int'(tap_srb[1]) == SRB0_FIG[int'(c) - 1], $sformatf("example cycle %0d SRB0 %0d", c, tap_srb[1]));
          end
          if (SRB1_FIG[int'(c) - 1] != 0) begin
            fig5_checks++;
            check(int'(tap_srb[2]) == SRB1_FIG[int'(c) - 1], $sformatf("example cycle %0d SRB1 %0d", c, tap_srb[2]));
          end
        end
      end
      // which input sources the PEs use this cycle
      for (int i = 0; i < K; i++)
        for (int j = 0; j < K; j++)
          case (dut.u_ctrl.sel[i][j])
            SEL_EXT:  m_ext++;
            SEL_R:    m_right++;
            SEL_D:    if (int'(dut.u_ctrl.eff_w) - 2 - j >= K) m_diag_srb++; else m_diag_pe++;
            default:  m_idle++;
          endcase
      // fresh inputs that fall in the padding and are not read
      for (int i = 0; i < K; i++)
        for (int j = 0; j < K; j++)
          if (dut.u_ctrl.sel_d[i][j] == SEL_EXT && !in_rd_en[i][j]) m_skip++;
    end
  end

  // ------------------------------------------------------------- runs
  task automatic do_run(input mode_e md, input int hi, input int wi, input int nvec,
                        input int ke = K);
    int ho, wo, exp_ma, exp_lat, ov, n_exp, nt;
    nt          = (ke + K - 1) / K;
    kernel_size = idx_t'(ke);
    mode       = md;
    ifmap_h    = idx_t'(hi);
    ifmap_w    = idx_t'(wi);
    fc_vectors = idx_t'(nvec);
    for (int i = 0; i < KEM; i++)
      for (int j = 0; j < KEM; j++) wgt[i][j] = data_t'($urandom);
    if (md == MODE_FC) begin
      for (int v = 0; v < nvec; v++)
        for (int e = 0; e < K*K; e++) fcin[v][e] = data_t'($urandom);
      ho = nvec; wo = 1;
      for (int v = 0; v < nvec; v++) begin
        psum_t s = '0;
        for (int e = 0; e < K*K; e++) s += psum_t'(fcin[v][e]) * psum_t'(wgt[e / K][e % K]);
        expect_q.push_back(s);
      end
      exp_ma = nvec * K * K;
    end else begin
      for (int r = 0; r < hi; r++)
        for (int c = 0; c < wi; c++)
          ifmap[r][c] = fig5 ? data_t'(r * wi + c + 1) : data_t'($urandom);
      ho = hi - ke + 1; wo = wi - ke + 1;
      for (int r = 0; r < ho; r++)
        for (int c = 0; c < wo; c++) begin
          psum_t s = '0;
          for (int a = 0; a < ke; a++)
            for (int b = 0; b < ke; b++)
              s += psum_t'(ifmap[r+a][c+b]) * psum_t'(wgt[a][b]);
          expect_q.push_back(s);
        end
      ov = (wi < 2*K) ? (wi - K - 1) * (K - 1) * (hi - K) : (K - 1) * (K - 1) * (hi - K);
      exp_ma = hi * wi + ov;
      if (ov > 0) m_refetch++;
    end
    n_exp    = ho * wo;
    exp_lat  = K + n_exp;
    n_reads  = 0;
    n_out    = 0;
    n_wload  = 0;
    first_rd = -1;
    last_out = -1;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    @(negedge clk);
    check(n_out == n_exp, $sformatf("%0dx%0d: %0d outputs, expected %0d", hi, wi, n_out, n_exp));
    check(expect_q.size() == 0, "all expected outputs delivered");
    expect_q.delete();
    if (ke == K || md == MODE_FC) begin
      check(n_reads == exp_ma, $sformatf("%0dx%0d: %0d memory reads, expected %0d", hi, wi, n_reads, exp_ma));
      // first read at cycle f is multiplied at f+1; the output seen valid
      // at cycle l was registered at the end of cycle l-1.
      check((last_out - 1) - (first_rd + 1) + 1 == longint'(exp_lat),
            $sformatf("%0dx%0d: latency %0d, expected %0d", hi, wi, (last_out - 1) - first_rd, exp_lat));
    end else begin
      m_tiled++;
    end
    check(n_wload == nt * nt * K, $sformatf("weight load took %0d cycles", n_wload));
    $display("run mode=%s %0dx%0d kernel %0d (vectors %0d): passes=%0d outputs=%0d reads=%0d cycles=%0d",
             md.name(), hi, wi, ke, nvec, nt * nt, n_out, n_reads, (last_out - 1) - first_rd);
  endtask

  initial begin
    m_ext = 0; m_right = 0; m_diag_srb = 0; m_diag_pe = 0; m_idle = 0;
    m_wload = 0; m_fc = 0; m_refetch = 0; m_switch = 0; m_full = 0;
    m_tiled = 0; m_wpad = 0; m_skip = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    fig5 = 1'b1;
    fig5_checks = 0;
    do_run(MODE_CONV, 5, 5, 0);      // worked example: 29 reads, 12 cycles
    fig5 = 1'b0;
    check(fig5_checks == 81 + 13, $sformatf("worked-example trace checks %0d", fig5_checks));
    do_run(MODE_CONV, 4, 4, 0);      // W_I = K+1: no SRB stage in use
    do_run(MODE_CONV, 6, 6, 0);      // W_I = 2K
    do_run(MODE_CONV, 7, 7, 0);      // W_I = 2K+1: all taps from SRB
    do_run(MODE_CONV, 9, 13, 0);
    do_run(MODE_CONV, 16, 16, 0);
    do_run(MODE_FC, 0, 0, 40);
    m_fc++;
    do_run(MODE_CONV, 12, 5, 0);     // back to convolution
    m_switch++;
    do_run(MODE_CONV, 32, 20, 0);
    // other kernel sizes: tile passes
    do_run(MODE_CONV, 12, 12, 0, 5);   // 2x2 passes, padded
    do_run(MODE_CONV, 10, 10, 0, 6);   // 2x2 passes, exact
    do_run(MODE_CONV, 16, 14, 0, 7);   // 3x3 passes, padded
    do_run(MODE_CONV, 8, 8, 0, 1);     // one padded pass
    do_run(MODE_CONV, 9, 9, 0, 2);     // one padded pass
    do_run(MODE_CONV, 40, 40, 0, 11);  // 4x4 passes
    do_run(MODE_CONV, 7, 7, 0);        // back to K_E = K
    do_run(MODE_CONV, HMAX, WMAX, 0);
    m_full++;
    do_run(MODE_CONV, HMAX, WMAX, 0, 5);
    $display("mechanisms: ext=%0d right=%0d diag_srb=%0d diag_pe=%0d idle=%0d wload=%0d fc=%0d refetch_runs=%0d switch=%0d full=%0d tiled_runs=%0d padded_weights=%0d skipped_reads=%0d",
             m_ext, m_right, m_diag_srb, m_diag_pe, m_idle, m_wload, m_fc, m_refetch, m_switch, m_full,
             m_tiled, m_wpad, m_skip);
    check(m_ext > 0, "external input used");
    check(m_right > 0, "right-to-left movement used");
    check(m_diag_srb > 0, "diagonal movement from an SRB used");
    check(m_diag_pe > 0, "diagonal movement from a PE used");
    check(m_idle > 0, "idle PEs seen");
    check(m_wload > 0, "weight load seen");
    check(m_fc > 0, "FC mode run");
    check(m_refetch > 0, "re-fetch overhead seen");
    check(m_switch > 0, "mode switch seen");
    check(m_full > 0, "full-size run");
    check(m_tiled > 0, "tiled kernel runs");
    check(m_wpad > 0, "padded tile weights zeroed");
    check(m_skip > 0, "padded reads skipped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
