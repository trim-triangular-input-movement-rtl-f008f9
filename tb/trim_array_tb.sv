// trim_array_tb: self-checking test of the K x K PE array with its SRBs.
//
// Loads a kernel through the vertical weight links, then drives random
// input selects, external inputs and SRB enables for several ifmap widths
// (narrow ones, where diagonal inputs come from the row below's PEs, and
// wide ones, where they come from SRB taps). A reference model of the
// array written here (weights, input registers, right-to-left, diagonal
// and SRB links, vertical psum chain) predicts the bottom-row psums, which
// are compared every cycle. The default sizes (K = 3, W_I up to 256) are
// used.
module trim_array_tb;
  import trim_pkg::*;

  localparam int K     = K_DEF;
  localparam int WMAX  = W_I_MAX_DEF;
  localparam int DEPTH = WMAX - K - 1;

  logic    clk = 1'b0, rst_n = 1'b0;
  logic [$clog2(WMAX+1)-1:0] ifmap_w;
  logic    w_load, srb_en;
  data_t   w_top   [K];
  logic    iext_en [K][K];
  data_t   i_ext   [K][K];
  in_sel_e sel     [K][K];
  psum_t   psum_bot [K];

  trim_array dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_srb_taps = 0, n_pe_taps = 0;

  data_t m_w [K][K], m_iext [K][K], m_il [K][K];
  psum_t m_psum [K][K];
  data_t m_srb [K][DEPTH];

  task automatic step();
    data_t x [K][K];
    data_t n_w [K][K];
    data_t n_srb [K][DEPTH];
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++) begin
        case (sel[i][j])
          SEL_EXT: x[i][j] = m_iext[i][j];
          SEL_R:   x[i][j] = (j < K-1) ? m_il[i][j+1] : '0;
          SEL_D: begin
            if (i == K-1) x[i][j] = '0;
            else begin
              int e = int'(ifmap_w) - 2 - j;
              if (e < K) begin x[i][j] = m_il[i+1][K-1-e]; n_pe_taps++; end
              else begin x[i][j] = m_srb[i+1][e-K]; n_srb_taps++; end
            end
          end
          default: x[i][j] = m_il[i][j];
        endcase
      end
    n_srb = m_srb;
    if (srb_en)
      for (int i = 1; i < K; i++) begin
        n_srb[i][0] = m_il[i][0];
        for (int k = 1; k < DEPTH; k++) n_srb[i][k] = m_srb[i][k-1];
      end
    n_w = m_w;
    for (int i = K-1; i >= 0; i--)
      for (int j = 0; j < K; j++) begin
        m_psum[i][j] = ((i == 0) ? psum_t'(0) : m_psum[i-1][j]) + psum_t'(m_w[i][j]) * psum_t'(x[i][j]);
        if (w_load) n_w[i][j] = (i == 0) ? w_top[j] : m_w[i-1][j];
        if (iext_en[i][j]) m_iext[i][j] = i_ext[i][j];
        m_il[i][j] = x[i][j];
      end
    m_w   = n_w;
    m_srb = n_srb;
  endtask

  initial begin
    ifmap_w = '0; w_load = 0; srb_en = 0;
    for (int i = 0; i < K; i++) begin
      w_top[i] = '0;
      for (int j = 0; j < K; j++) begin
        iext_en[i][j] = 0; i_ext[i][j] = '0; sel[i][j] = SEL_IDLE;
        m_w[i][j] = '0; m_iext[i][j] = '0; m_il[i][j] = '0; m_psum[i][j] = '0;
      end
    end
    for (int i = 0; i < K; i++) for (int k = 0; k < DEPTH; k++) m_srb[i][k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int phase = 0; phase < 8; phase++) begin
      automatic int widths [8] = '{K+1, 2*K, 5, 2*K+1, 16, 64, WMAX-1, WMAX};
      ifmap_w = $bits(ifmap_w)'(widths[phase]);
      for (int n = 0; n < 600; n++) begin
        @(negedge clk);
        w_load = (n < K) || ($urandom % 64 == 0);
        srb_en = ($urandom % 8) != 0;
        for (int j = 0; j < K; j++) w_top[j] = data_t'($urandom);
        for (int i = 0; i < K; i++)
          for (int j = 0; j < K; j++) begin
            iext_en[i][j] = 1'($urandom % 2);
            i_ext[i][j]   = data_t'($urandom);
            sel[i][j]     = in_sel_e'($urandom % 4);
          end
        step();
        @(posedge clk);
        #1;
        for (int j = 0; j < K; j++) begin
          checks++;
          if (psum_bot[j] != m_psum[K-1][j]) begin
            failures++;
            if (failures < 10) $display("FAIL W=%0d n=%0d col %0d: %0d expected %0d",
                                        ifmap_w, n, j, psum_bot[j], m_psum[K-1][j]);
          end
        end
      end
    end
    checks += 2;
    if (n_srb_taps == 0) failures++;
    if (n_pe_taps == 0) failures++;
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
