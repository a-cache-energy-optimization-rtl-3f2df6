// energy_saving_algorithm: picks the number of active cache colours for the
// next interval so that the memory-subsystem energy is minimal while the
// estimated slowdown against the full cache stays within lambda.
//
// At the end of every interval (start) it takes the interval's counts and
// the five profiling units' sampled miss counts and then:
//  1. computes the memory stall cycles per load miss of the interval,
//     spm = stall / load_misses (16 fractional bits, sequential divider; with
//     no load miss it uses the 160-cycle memory latency instead);
//  2. estimates, for a colour count c, the load misses LM(c) and misses M(c)
//     by scaling the profiling counts by 64 (sampling ratio) and linearly
//     interpolating between the two profiled sizes around c
//     (N, N/2, N/4, N/8, N/16 colours);
//  3. estimates the execution time T(c) = cycles - stall + spm * LM(c),
//     first for the full cache (T_f), then for every candidate
//     c = cur-Q .. cur+Q in steps of 2, limited to [C_LOW, N];
//  4. rejects a candidate if (T(c) - T_f) / T_f > lambda (2.5 %), evaluated
//     as T(c)*1000 > T_f*(1000 + LAMBDA_PERMILLE);
//  5. evaluates the energy of Eq. 3-8 in femtojoules
//       E = P_L2 * F_A * T + E_R*R + E_W*(W + M) + P_mem * T + E_dyn * M
//           + E_chi * B,
//     with F_A = (c + 0.03 (N-c)) / N (gated colours still leak about 3 %),
//     fills counted as L2 writes, B = |c - cur| * blocks per colour, and
//     keeps the candidate of least energy (the smallest c on a tie).
// If every candidate is rejected it returns the largest candidate.
// Timing: about 70 cycles for the division plus 3 cycles per configuration
// (at most Q+1 candidates and the full size); done pulses with new_colors.
// The candidate rules, lambda and the energy model follow the scheme; the
// interpolation, fixed-point formats, tie-break, fall-back and the treatment
// of fills and gated leakage are this design's choices.
module energy_saving_algorithm
  import smart_pkg::*;
#(
  parameter int unsigned N         = smart_pkg::NUM_COLORS,
  parameter int unsigned CLOW      = smart_pkg::C_LOW,
  parameter int unsigned Q         = smart_pkg::Q_MAX,
  parameter int unsigned STEP      = smart_pkg::COLOR_STEP,
  parameter int unsigned LAMBDA_PM = smart_pkg::LAMBDA_PERMILLE,
  parameter int unsigned SSHIFT    = smart_pkg::SAMPLE_SHIFT,
  parameter int unsigned BLOCKS_PER_COLOR = smart_pkg::SETS_PER_COLOR * smart_pkg::L2_WAYS,
  localparam int unsigned CW = $clog2(N) + 1,
  localparam int unsigned NP = smart_pkg::NUM_PROF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  interval_stats_t  stats,
  input  logic [CNT_W-1:0] prof_misses      [NP],
  input  logic [CNT_W-1:0] prof_load_misses [NP],
  input  logic [CW-1:0]    cur_colors,
  output logic             busy,
  output logic             done,
  output logic [CW-1:0]    new_colors,
  output logic [E_W-1:0]   best_energy,     // fJ, of the chosen configuration
  output logic [7:0]       n_evaluated,     // candidates examined
  output logic [7:0]       n_rejected       // candidates rejected by lambda
);

  localparam int unsigned LOGN  = $clog2(N);
  localparam int unsigned DIV_W = CNT_W + 16;

  typedef enum logic [2:0] {S_IDLE, S_DIV, S_FULL, S_TIME, S_ENERGY, S_DONE} state_e;
  state_e state_q;

  interval_stats_t  st_q;
  logic [CNT_W-1:0] pm_q [NP];
  logic [CNT_W-1:0] plm_q [NP];
  logic [CW-1:0]    cur_q, c_q, c_hi_q, best_c_q;

  // sequential restoring divider: spm_q = (stall << 16) / load_misses
  logic [DIV_W-1:0] quo_q, rem_q;
  logic [CNT_W-1:0] den_q;
  logic [6:0]       div_cnt_q;
  logic [DIV_W-1:0] spm_q;

  logic [63:0]      tf_q, ti_q;
  logic [63:0]      mi_q;
  logic             have_best_q;

  // ---- miss estimate for c colours from the profiling units -------------
  function automatic logic [63:0] interp(input logic [CW-1:0] c,
                                         input logic [CNT_W-1:0] arr [NP]);
    int unsigned lo;
    longint signed v_lo, v_hi, res;
    int unsigned p_lo;
    lo = NP - 1;
    for (int k = NP - 1; k >= 0; k--)
      if (int'(c) >= int'(N >> k)) lo = k;
    p_lo = N >> lo;
    v_lo = longint'(arr[lo]) <<< SSHIFT;
    if (lo == 0 || int'(c) < int'(p_lo)) res = v_lo;
    else begin
      v_hi = longint'(arr[lo-1]) <<< SSHIFT;
      res  = v_lo + (((v_hi - v_lo) * (longint'(c) - longint'(p_lo))) >>> (LOGN - lo));
    end
    if (res < 0) res = 0;
    return 64'(res);
  endfunction

  function automatic logic [63:0] time_est(input logic [63:0] lm);
    logic [127:0] p;
    p = 128'(spm_q) * 128'(lm);
    return 64'(st_q.cycles) - 64'(st_q.stall) + 64'(p >> 16);
  endfunction

  // ---- energy of one candidate (Eq. 3-8) --------------------------------
  logic [E_W-1:0] e_leak, e_dyn, e_mem, e_algo, e_total;
  logic [CW-1:0]  dc;
  logic           reject;
  always_comb begin
    dc      = (c_q > cur_q) ? c_q - cur_q : cur_q - c_q;
    e_leak  = (E_W'(L2_LEAK_FJ_PER_CYC) * E_W'(ti_q)
               * E_W'(32'(c_q) * 1024 + 32'(N - int'(c_q)) * GATED_LEAK_Q10)) >> (LOGN + 10);
    e_dyn   = E_W'(L2_READ_FJ) * E_W'(st_q.reads)
            + E_W'(L2_WRITE_FJ) * (E_W'(st_q.writes) + E_W'(mi_q));
    e_mem   = E_W'(MEM_LEAK_FJ_PER_CYC) * E_W'(ti_q) + E_W'(MEM_DYN_FJ) * E_W'(mi_q);
    e_algo  = E_W'(TRANSITION_FJ) * E_W'(dc) * E_W'(BLOCKS_PER_COLOR);
    e_total = e_leak + e_dyn + e_mem + e_algo;
    reject  = (96'(ti_q) * 96'd1000) > (96'(tf_q) * 96'(1000 + LAMBDA_PM));
  end

  assign busy = state_q != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      st_q        <= '0;
      for (int k = 0; k < NP; k++) begin pm_q[k] <= '0; plm_q[k] <= '0; end
      cur_q       <= CW'(N);
      c_q         <= '0;
      c_hi_q      <= '0;
      best_c_q    <= CW'(N);
      quo_q       <= '0;
      rem_q       <= '0;
      den_q       <= '0;
      div_cnt_q   <= '0;
      spm_q       <= '0;
      tf_q        <= '0;
      ti_q        <= '0;
      mi_q        <= '0;
      have_best_q <= 1'b0;
      done        <= 1'b0;
      new_colors  <= CW'(N);
      best_energy <= '0;
      n_evaluated <= '0;
      n_rejected  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          st_q  <= stats;
          pm_q  <= prof_misses;
          plm_q <= prof_load_misses;
          cur_q <= cur_colors;
          // candidate range, clipped to [CLOW, N]
          c_q    <= (int'(cur_colors) - int'(Q) < int'(CLOW)) ? CW'(CLOW) : cur_colors - CW'(Q);
          c_hi_q <= (int'(cur_colors) + int'(Q) > int'(N)) ? CW'(N) : cur_colors + CW'(Q);
          quo_q  <= DIV_W'(stats.stall) << 16;
          rem_q  <= '0;
          den_q  <= stats.load_misses;
          div_cnt_q   <= 7'(DIV_W);
          have_best_q <= 1'b0;
          n_evaluated <= '0;
          n_rejected  <= '0;
          state_q <= S_DIV;
        end
        S_DIV: begin
          if (den_q == '0) begin
            spm_q   <= DIV_W'(MEM_LATENCY) << 16;
            state_q <= S_FULL;
          end else if (div_cnt_q == '0) begin
            spm_q   <= quo_q;
            state_q <= S_FULL;
          end else begin
            logic [DIV_W:0] r;
            r = {rem_q, quo_q[DIV_W-1]};
            if (r >= (DIV_W+1)'(den_q)) begin
              rem_q <= DIV_W'(r - (DIV_W+1)'(den_q));
              quo_q <= {quo_q[DIV_W-2:0], 1'b1};
            end else begin
              rem_q <= DIV_W'(r);
              quo_q <= {quo_q[DIV_W-2:0], 1'b0};
            end
            div_cnt_q <= div_cnt_q - 1'b1;
          end
        end
        S_FULL: begin
          tf_q    <= time_est(interp(CW'(N), plm_q));
          state_q <= S_TIME;
        end
        S_TIME: begin
          ti_q    <= time_est(interp(c_q, plm_q));
          mi_q    <= interp(c_q, pm_q);
          state_q <= S_ENERGY;
        end
        S_ENERGY: begin
          n_evaluated <= n_evaluated + 1'b1;
          if (reject) n_rejected <= n_rejected + 1'b1;
          else if (!have_best_q || e_total < best_energy) begin
            have_best_q <= 1'b1;
            best_energy <= e_total;
            best_c_q    <= c_q;
          end
          if (c_q + CW'(STEP) > c_hi_q) state_q <= S_DONE;
          else begin
            c_q     <= c_q + CW'(STEP);
            state_q <= S_TIME;
          end
        end
        S_DONE: begin
          new_colors <= have_best_q ? best_c_q : c_hi_q;
          done       <= 1'b1;
          state_q    <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
