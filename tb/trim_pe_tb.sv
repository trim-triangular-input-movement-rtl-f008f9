// trim_pe_tb: self-checking test of one TrIM PE.
//
// Drives random weights, inputs and selects and compares the PE with a
// reference written here: the weight register loads on w_load, the
// external input register on iext_en, the used input is iext/right/
// diagonal/held by sel, I_L shows the used input one cycle later and
// psum_out = psum_in + W * input, also one cycle later.
module trim_pe_tb;
  import trim_pkg::*;

  logic    clk = 1'b0, rst_n = 1'b0;
  logic    w_load, iext_en;
  data_t   w_in, w_out, i_ext, i_r, i_d, i_l;
  in_sel_e sel;
  psum_t   psum_in, psum_out;

  trim_pe dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  data_t m_w, m_iext, m_il;
  psum_t m_psum;
  int n_sel [4];

  initial begin
    w_load = 0; iext_en = 0; w_in = 0; i_ext = 0; i_r = 0; i_d = 0;
    sel = SEL_IDLE; psum_in = 0;
    m_w = 0; m_iext = 0; m_il = 0; m_psum = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      data_t x;
      @(negedge clk);
      w_load  = (n < 4) || ($urandom % 16 == 0);
      iext_en = 1'($urandom % 2);
      w_in    = data_t'($urandom);
      i_ext   = data_t'($urandom);
      i_r     = data_t'($urandom);
      i_d     = data_t'($urandom);
      psum_in = psum_t'($signed($urandom));
      if (n < 8) psum_in = (n % 2 == 1) ? 32'sh7fff_0000 : -32'sh7fff_0000;
      sel     = in_sel_e'($urandom % 4);
      n_sel[sel]++;
      // reference model, evaluated before the clock edge
      case (sel)
        SEL_EXT: x = m_iext;
        SEL_R:   x = i_r;
        SEL_D:   x = i_d;
        default: x = m_il;
      endcase
      m_psum = psum_in + psum_t'(m_w) * psum_t'(x);
      m_il   = x;
      if (w_load)  m_w    = w_in;
      if (iext_en) m_iext = i_ext;
      @(posedge clk);
      #1;
      checks++;
      if (psum_out !== m_psum || i_l !== m_il || w_out !== m_w) begin
        failures++;
        if (failures < 10)
          $display("FAIL n=%0d sel=%s psum %0d/%0d il %0d/%0d w %0d/%0d", n, sel.name(),
                   psum_out, m_psum, i_l, m_il, w_out, m_w);
      end
    end
    for (int s = 0; s < 4; s++) begin
      checks++;
      if (n_sel[s] == 0) failures++;
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
