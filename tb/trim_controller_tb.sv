// trim_controller_tb: checks the TrIM sequencer against Algorithm 1.
//
// For several ifmap sizes the testbench builds, cycle by cycle, the input
// source of every PE by a literal transcription of the TrIM dataflow
// algorithm (global time t, row counter alpha, rows 1..K-2 copying row 0
// i cycles later) and compares it with the controller's registered selects.
// It also checks that every I_ext select was preceded one cycle earlier by
// a read request for ifmap[h+i][w+j], the K-cycle weight load order
// (kernel row K-1 first), the timing of psum_valid and the done pulse.
// Runs use K_E = K, i.e. a single tile pass; tiling is tested in
// trim_top_tb.
// The algorithm as printed would select I_D for row 0 at t = H_O*W_O (its
// "t mod W_O = 0" test precedes the idle test); that cycle produces no
// output, so it is compared as idle.
module trim_controller_tb;
  import trim_pkg::*;

  localparam int K = K_DEF;

  logic    clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  mode_e   mode = MODE_CONV;
  idx_t    ifmap_h = '0, ifmap_w = '0, fc_vectors = '0;
  logic    busy, done, wt_rd_en, w_load, srb_en, psum_valid;
  idx_t    wt_rd_row;
  idx_t    wt_rd_col;
  logic [$clog2(W_I_MAX_DEF+1)-1:0] eff_w;
  logic    wt_mask   [K];
  logic    tile_start, tile_first, tile_last;
  idx_t    kernel_size = idx_t'(K);
  logic    in_rd_en  [K][K];
  idx_t    in_rd_row [K][K];
  idx_t    in_rd_col [K][K];
  in_sel_e sel       [K][K];

  trim_controller dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // Algorithm 1, row 0 and row K-1, for one (t, j).
  function automatic in_sel_e alg_row0(int t, int j, int wi, int ho, int wo, ref int alpha);
    if (t == 0) return SEL_EXT;
    else if (t >= 1 && t <= wo - 1) return (j == K-1) ? SEL_EXT : SEL_R;
    else if (t % wo == 0) begin
      if (t >= ho * wo) return SEL_IDLE;  // see header
      if (j == 0) alpha++;                // once per cycle
      return SEL_D;
    end
    else if (t == alpha * wo + 1) return (j < K-1) ? SEL_R : SEL_D;
    else if (t >= ho * wo) return SEL_IDLE;
    else if (j < K-1) return SEL_R;
    else if (wi <= 2*K) return SEL_EXT;
    else if ((alpha + 1) * wo - K < t && t <= (alpha + 1) * wo - 1) return SEL_EXT;
    else return SEL_D;
  endfunction

  function automatic in_sel_e alg_rowlast(int t, int j, int ho, int wo);
    if (t < K-1) return SEL_IDLE;
    if (t - (K-1) >= ho * wo) return SEL_IDLE;
    if (t == K-1 || (t - K + 1) % wo == 0) return SEL_EXT;
    return (j < K-1) ? SEL_R : SEL_EXT;
  endfunction

  task automatic run(int hi, int wi);
    int ho = hi - K + 1, wo = wi - K + 1;
    int nt = ho * wo + K + 2;
    in_sel_e row0 [][K];
    in_sel_e exp_sel [K][K];
    int alpha = 0;
    int t0, wl, nvalid, ndone;
    logic prev_rd [K][K];
    idx_t prev_row [K][K], prev_col [K][K];
    row0 = new[nt];
    for (int t = 0; t < nt; t++)
      for (int j = 0; j < K; j++) row0[t][j] = alg_row0(t, j, wi, ho, wo, alpha);
    ifmap_h = idx_t'(hi);
    ifmap_w = idx_t'(wi);
    mode = MODE_CONV;
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    // weight load: K cycles, kernel rows K-1 .. 0
    wl = 0;
    while (!wt_rd_en) @(negedge clk);
    while (wt_rd_en) begin
      checks++;
      if (int'(wt_rd_row) != K-1-wl || !w_load) failures++;
      // K_E = K: a single pass with every weight in use
      checks++;
      if (wt_rd_col != '0 || !tile_first || !tile_last || !tile_start) failures++;
      for (int j = 0; j < K; j++) if (!wt_mask[j]) failures++;
      wl++;
      @(negedge clk);
    end
    checks++;
    if (wl != K) failures++;
    // first read request, then selects from the next cycle on
    // requests made in the cycle before the first clock edge below
    prev_rd = in_rd_en; prev_row = in_rd_row; prev_col = in_rd_col;
    t0 = -1; nvalid = 0; ndone = 0;
    for (int c = 0; c < nt + 4; c++) begin
      @(posedge clk); #1;
      if (t0 < 0 && sel[0][0] != SEL_IDLE) t0 = c;
      if (t0 >= 0) begin
        int t = c - t0;
        for (int i = 0; i < K; i++)
          for (int j = 0; j < K; j++) begin
            if (i == K-1) exp_sel[i][j] = alg_rowlast(t, j, ho, wo);
            else if (t - i < 0 || t - i >= nt) exp_sel[i][j] = SEL_IDLE;
            else exp_sel[i][j] = row0[t - i][j];
            checks++;
            if (sel[i][j] != exp_sel[i][j]) begin
              failures++;
              if (failures < 20) $display("FAIL %0dx%0d t=%0d PE(%0d,%0d): %s expected %s",
                                          hi, wi, t, i, j, sel[i][j].name(), exp_sel[i][j].name());
            end
            // the previous cycle requested exactly the external inputs
            checks++;
            if (prev_rd[i][j] != (sel[i][j] == SEL_EXT)) failures++;
            if (sel[i][j] == SEL_EXT) begin
              int s = t - i;
              checks++;
              if (int'(prev_row[i][j]) != s / wo + i || int'(prev_col[i][j]) != s % wo + j) begin
                failures++;
                if (failures < 20) $display("FAIL %0dx%0d t=%0d PE(%0d,%0d): read (%0d,%0d) expected (%0d,%0d)",
                                            hi, wi, t, i, j, prev_row[i][j], prev_col[i][j], s / wo + i, s % wo + j);
              end
            end
          end
        // psum_valid: bottom row's psums of step s appear at t = s + K
        checks++;
        if (psum_valid != (t >= K && t < K + ho * wo)) failures++;
        if (psum_valid) nvalid++;
        if (done) ndone++;
      end
      prev_rd = in_rd_en; prev_row = in_rd_row; prev_col = in_rd_col;
      #0;
    end
    checks += 2;
    if (nvalid != ho * wo) failures++;
    if (ndone != 1) begin failures++; $display("FAIL done pulses %0d", ndone); end
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(5, 5);
    run(4, 4);
    run(6, 6);
    run(7, 7);
    run(8, 11);
    run(12, 9);
    run(20, 16);
    run(10, 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
