// trim_controller: sequencer of the TrIM array (weight load + Algorithm 1).
//
// After start the controller runs three phases:
//   LOAD  K cycles. In cycle c it reads kernel row K-1-c from main memory
//         (wt_rd_en, wt_rd_row; data is taken in the same cycle) and pulses
//         w_load, so the weight rows shift down the array and, after K
//         cycles, PE row r holds kernel row r.
//   RUN   Each array row i walks through the output positions (h, w),
//         h < H_O, w < W_O, one per cycle; row i lags row 0 by i cycles so
//         the psums meet in the vertical pipeline. For every PE the
//         controller chooses the input source of Algorithm 1:
//           row K-1 and, for h = 0, every row: at w = 0 all PEs take a
//             fresh value from memory; for w > 0 PEs j < K-1 take I_R and
//             PE K-1 takes a fresh value;
//           rows i < K-1, h > 0: at w = 0 all PEs take I_D; for w > 0
//             PEs j < K-1 take I_R and PE K-1 takes I_D when w = 1 or
//             (W_I > 2K and w <= W_O-K), otherwise a fresh value.
//         A fresh value for PE(i,j) at (h, w) is ifmap[h+i][w+j]. The
//         controller requests it one cycle early (in_rd_en/row/col, data
//         expected in the same cycle) so it sits in the PE's input
//         register when needed; the select itself is registered (sel).
//   DONE  after the last output has left the adder tree; done pulses.
// In MODE_FC the array works as a weight-stationary dot-product engine:
// every PE takes a fresh value every cycle, PE(i,j) of vector v reading
// element i*K+j of vector v (row = v, col = i*K+j), and one K*K-element
// dot product leaves the adder tree per cycle.
// Kernel tiling: a K_E x K_E kernel (kernel_size, 1 <= K_E <= K_E_MAX)
// other than K x K is run as T x T passes, T = ceil(K_E/K). Pass (ta, tb)
// loads kernel rows ta*K.., columns tb*K.. (wt_rd_row/wt_rd_col); weights
// beyond the kernel edge are forced to zero (wt_mask), and the pass
// convolves the ifmap window starting at (ta*K, tb*K) of size
// (H_O+K-1) x (W_O+K-1), H_O = H_I-K_E+1, W_O = W_I-K_E+1. Reads of that
// window that fall outside the ifmap are not issued (they would only meet
// zero weights). tile_first/tile_last/tile_start tell the tile
// accumulator how to combine the passes. With K_E = K there is one pass
// and nothing changes. eff_w is the window width W_O+K-1 seen by the
// array, which selects the SRB taps.
// Timing: first multiply one cycle after the first read request; the last
// of H_O*W_O outputs is registered K + H_O*W_O cycles after the first
// multiply (rows fill in K-1 cycles, one more for the adder tree).
// psum_valid marks the cycles in which psum_bot of the array carries an
// output's K column psums. The encoding of modes, the memory interface
// and the run-time size inputs are this design's choices.
module trim_controller
  import trim_pkg::*;
#(
  parameter int unsigned K       = K_DEF,
  parameter int unsigned W_I_MAX = W_I_MAX_DEF,
  parameter int unsigned H_I_MAX = H_I_MAX_DEF,
  parameter int unsigned K_E_MAX = K_E_MAX_DEF
) (
  input  logic    clk,
  input  logic    rst_n,
  // command
  input  logic    start,
  input  mode_e   mode,
  input  idx_t    ifmap_h,      // conv: H_I
  input  idx_t    ifmap_w,      // conv: W_I
  input  idx_t    fc_vectors,   // fc: number of input vectors
  input  idx_t    kernel_size,  // conv: K_E
  output logic    busy,
  output logic    done,
  // weight read port and array weight load
  output logic    wt_rd_en,
  output idx_t    wt_rd_row,
  output idx_t    wt_rd_col,
  output logic    wt_mask   [K],
  output logic    w_load,
  // input read ports, one per PE
  output logic    in_rd_en  [K][K],
  output idx_t    in_rd_row [K][K],
  output idx_t    in_rd_col [K][K],
  // array control
  output in_sel_e sel       [K][K],
  output logic [$clog2(W_I_MAX+1)-1:0] eff_w,
  output logic    srb_en,
  output logic    psum_valid,
  // tile accumulator control
  output logic    tile_start,
  output logic    tile_first,
  output logic    tile_last
);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_RUN, S_DONE} state_e;

  state_e state;
  mode_e  mode_q;
  idx_t   hi_q, wi_q;     // ifmap size of the current run
  idx_t   ke_q;           // kernel size K_E (fc: K)
  idx_t   nt_q;           // tiles per kernel dimension, ceil(K_E/K)
  idx_t   ta, tb;         // current tile
  idx_t   ro, co;         // its offset: ta*K, tb*K
  idx_t   ho_q, wo_q;     // number of output rows / columns (fc: vectors, 1)
  idx_t   load_cnt;

  // Plan stage: position each row works on in the next cycle. Row 0 has
  // its own counters (r0_*); rows 1..K-1 take delayed copies (dv/dh/dw).
  logic   r0_v;
  idx_t   r0_h, r0_w;
  logic   dv [K];
  idx_t   dh [K];
  idx_t   dw [K];
  logic   pv [K];
  idx_t   ph [K];
  idx_t   pw [K];
  // Execute stage of the bottom row and the psum register behind it.
  logic   ev [K];
  logic   pv_bot_q;

  logic   wide;           // W_I > 2K: SRBs deep enough for all K taps
  logic   pipe_busy;      // some row or the psum stage still has work

  always_comb begin
    pipe_busy = pv_bot_q;
    for (int i = 0; i < int'(K); i++) pipe_busy |= pv[i] | ev[i];
  end

  idx_t   win_w;          // width of the window the array sees
  assign win_w      = wo_q + idx_t'(K) - idx_t'(1);
  assign eff_w      = win_w[$clog2(W_I_MAX+1)-1:0];
  assign wide       = (win_w > idx_t'(2*K));
  assign tile_first = (ta == '0) && (tb == '0);
  assign tile_last  = (ta == nt_q - idx_t'(1)) && (tb == nt_q - idx_t'(1));

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      mode_q   <= MODE_CONV;
      hi_q     <= '0;
      wi_q     <= '0;
      ke_q     <= '0;
      nt_q     <= '0;
      ta       <= '0;
      tb       <= '0;
      ro       <= '0;
      co       <= '0;
      ho_q     <= '0;
      wo_q     <= '0;
      load_cnt <= '0;
      r0_v     <= 1'b0;
      r0_h     <= '0;
      r0_w     <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          mode_q   <= mode;
          hi_q     <= ifmap_h;
          wi_q     <= ifmap_w;
          ta       <= '0;
          tb       <= '0;
          ro       <= '0;
          co       <= '0;
          if (mode == MODE_FC) begin
            ke_q <= idx_t'(K);
            nt_q <= idx_t'(1);
            ho_q <= fc_vectors;
            wo_q <= idx_t'(1);
          end else begin
            ke_q <= kernel_size;
            nt_q <= (kernel_size + idx_t'(K) - idx_t'(1)) / idx_t'(K);
            ho_q <= ifmap_h - kernel_size + idx_t'(1);
            wo_q <= ifmap_w - kernel_size + idx_t'(1);
          end
          load_cnt <= '0;
          state    <= S_LOAD;
        end
        S_LOAD: begin
          load_cnt <= load_cnt + idx_t'(1);
          if (load_cnt == idx_t'(K-1)) begin
            state <= S_RUN;
            r0_v  <= (ho_q != '0);
            r0_h  <= '0;
            r0_w  <= '0;
          end
        end
        S_RUN: begin
          if (r0_v) begin
            if (r0_w == wo_q - idx_t'(1)) begin
              r0_w <= '0;
              r0_h <= r0_h + idx_t'(1);
              if (r0_h == ho_q - idx_t'(1)) r0_v <= 1'b0;
            end else begin
              r0_w <= r0_w + idx_t'(1);
            end
          end
          if (!pipe_busy) begin
            if (tile_last) begin
              state <= S_DONE;
            end else begin
              // next tile pass: reload weights and run again
              load_cnt <= '0;
              state    <= S_LOAD;
              if (tb == nt_q - idx_t'(1)) begin
                tb <= '0;
                co <= '0;
                ta <= ta + idx_t'(1);
                ro <= ro + idx_t'(K);
              end else begin
                tb <= tb + idx_t'(1);
                co <= co + idx_t'(K);
              end
            end
          end
        end
        default: state <= S_IDLE;   // S_DONE lasts one cycle
      endcase
    end
  end

  // Rows 1..K-1 repeat row 0's walk i cycles later.
  always_comb begin
    pv[0] = r0_v;
    ph[0] = r0_h;
    pw[0] = r0_w;
    for (int i = 1; i < int'(K); i++) begin
      pv[i] = dv[i];
      ph[i] = dh[i];
      pw[i] = dw[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(K); i++) begin
        dv[i] <= 1'b0;
        dh[i] <= '0;
        dw[i] <= '0;
        ev[i] <= 1'b0;
      end
      pv_bot_q <= 1'b0;
    end else begin
      dv[0] <= 1'b0;   // unused
      dh[0] <= '0;
      dw[0] <= '0;
      for (int i = 1; i < int'(K); i++) begin
        dv[i] <= pv[i-1];
        dh[i] <= ph[i-1];
        dw[i] <= pw[i-1];
      end
      for (int i = 0; i < int'(K); i++) ev[i] <= pv[i];
      pv_bot_q <= ev[K-1];
    end
  end

  // ------------------------------------------ per-PE source (Algorithm 1)
  in_sel_e sel_d [K][K];

  always_comb begin
    for (int i = 0; i < int'(K); i++) begin
      for (int j = 0; j < int'(K); j++) begin
        in_sel_e s;
        if (!pv[i] || state != S_RUN) begin
          s = SEL_IDLE;
        end else if (mode_q == MODE_FC) begin
          s = SEL_EXT;
        end else if (i == int'(K) - 1 || ph[i] == '0) begin
          if (pw[i] == '0 || j == int'(K) - 1) s = SEL_EXT;
          else                                 s = SEL_R;
        end else begin
          if (pw[i] == '0)            s = SEL_D;
          else if (j < int'(K) - 1)   s = SEL_R;
          else if (pw[i] == idx_t'(1) ||
                   (wide && pw[i] + idx_t'(K) <= wo_q))
                                      s = SEL_D;
          else                        s = SEL_EXT;
        end
        sel_d[i][j]     = s;
        if (mode_q == MODE_FC) begin
          in_rd_row[i][j] = ph[i];
          in_rd_col[i][j] = idx_t'(i*int'(K) + j);
        end else begin
          in_rd_row[i][j] = ph[i] + idx_t'(i);
          in_rd_col[i][j] = pw[i] + idx_t'(j);
        end
        in_rd_row[i][j] = in_rd_row[i][j] + ro;
        in_rd_col[i][j] = in_rd_col[i][j] + co;
        // skip reads outside the ifmap (padded part of a tiled window)
        in_rd_en[i][j]  = (s == SEL_EXT) && (mode_q == MODE_FC ||
                          (in_rd_row[i][j] < hi_q && in_rd_col[i][j] < wi_q));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(K); i++)
        for (int j = 0; j < int'(K); j++) sel[i][j] <= SEL_IDLE;
    end else begin
      sel <= sel_d;
    end
  end

  // ------------------------------------------------------------- outputs
  assign wt_rd_en   = (state == S_LOAD);
  assign wt_rd_row  = ro + idx_t'(K-1) - load_cnt;
  assign wt_rd_col  = co;
  always_comb
    for (int j = 0; j < int'(K); j++)
      wt_mask[j] = (wt_rd_row < ke_q) && (co + idx_t'(j) < ke_q);
  assign tile_start = (state == S_LOAD);
  assign w_load     = (state == S_LOAD);
  assign srb_en     = (state == S_RUN);
  assign psum_valid = pv_bot_q;
  assign busy       = (state != S_IDLE);
  assign done       = (state == S_DONE);

  // ---------------------------------------------------------- assertions
  // A convolution needs W_O >= 2 for the diagonal taps (K_E+1 <= W_I) and
  // at least one output row; the ifmap and the window seen by the array
  // (W_O+K-1 wide) must fit the SRBs and counters.
  a_conv_size: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start && mode == MODE_CONV) |->
      (kernel_size >= idx_t'(1) && kernel_size <= idx_t'(K_E_MAX) &&
       ifmap_w >= kernel_size + idx_t'(1) && ifmap_w <= idx_t'(W_I_MAX) &&
       ifmap_h >= kernel_size && ifmap_h <= idx_t'(H_I_MAX) &&
       ifmap_w - kernel_size + idx_t'(K) <= idx_t'(W_I_MAX)))
    else $error("ifmap %0d x %0d, kernel %0d not supported",
                ifmap_h, ifmap_w, kernel_size);

  // Weight loading and computing never overlap.
  a_load_excl: assert property (@(posedge clk) disable iff (!rst_n)
    w_load |-> !srb_en);

endmodule
