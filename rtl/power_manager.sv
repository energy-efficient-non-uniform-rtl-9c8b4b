// power_manager: the monitoring unit that decides which LLC banks are powered.
//
// Every INTERVAL cycles (free-running timer) it pulses `snap`; the cache controllers then present,
// per bank, C_A (accesses), C_C (accesses to compressed lines), C_I (accesses
// to invalid lines) and C_X = C_A - C_C - C_I. The unit then runs, in order:
//  1. Power-on, individual: an off bank with (C_C + C_I) < TH_IND_PM/1000 * C_A
//     is switched on.
//  2. Power-on, collective: if the misses of the off banks, sum of (C_A - C_C),
//     exceed TH_T_PM/1000 of all accesses, half of the off banks are switched
//     on, those with most misses first.
//  3. Statistic-based power-off (Algorithm 1): mean mu and standard deviation
//     sigma of C_X over all banks (mean_std_unit). If sigma > mu, every bank
//     with C_X < mu is switched off with M = 1 (uncompressed lines discarded).
//     Otherwise, if mu two intervals ago exceeds 2*mu and fewer than N_OFF
//     banks are off, the on banks with the lowest C_X are switched off, up to
//     N_OFF off in total, with M = 0 (uncompressed lines migrated).
//     Then the mean history shifts: mu(j-2) <- mu(j-1), mu(j-1) <- mu.
// Banks switched on in step 1 or 2 are not switched off in the same interval.
// Ranking (steps 2 and 3) scans the banks one per cycle per chosen bank, in
// the background. t_on (T field) and m_discard (M field) hold between
// intervals. The event counters are status outputs. The thresholds, N_OFF and
// the 64M-cycle interval are the paper's; the order of the steps, the
// reference of the collective threshold and the ranking hardware are this
// design's reading of it.
module power_manager
  import nfv_pkg::*;
#(
  parameter int          NB        = NUM_BANKS,
  parameter int unsigned INTERVAL  = 32'd67108864,   // 64M cycles
  parameter int          N_OFF     = 16,
  parameter int          TH_IND_PM = 7,              // 0.7 %
  parameter int          TH_T_PM   = 10              // 1 %
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic             snap,
  input  logic [CNT_W-1:0] cx [NB],
  input  logic [CNT_W-1:0] ca [NB],
  input  logic [CNT_W-1:0] cc [NB],
  input  logic [CNT_W-1:0] ci [NB],
  output logic [NB-1:0]    t_on,
  output logic [NB-1:0]    m_discard,
  output logic [CNT_W-1:0] last_mean,
  output logic [CNT_W-1:0] last_std,
  output logic [15:0]      n_intervals,
  output logic [15:0]      n_nonuniform,    // branch (i) taken
  output logic [15:0]      n_consecutive,   // branch (ii) taken
  output logic [15:0]      n_on_individual,
  output logic [15:0]      n_on_collective
);
  localparam int IW = $clog2(NB);
  localparam int CW = $clog2(NB + 1);
  localparam int SUM_W = CNT_W + IW + 11;   // room for *1000

  typedef enum logic [2:0] {S_RUN, S_ON_IND, S_ON_COLL, S_SEL, S_STAT, S_DECIDE} state_e;
  state_e state, sel_ret;

  logic [31:0]      timer;
  logic [NB-1:0]    just_on;
  logic [CNT_W-1:0] mu1, mu2;            // mu(j-1), mu(j-2)

  // ---- one-cycle power-on checks over all banks ------------------------------
  logic [NB-1:0]    ind_on;
  logic [SUM_W-1:0] miss_off, acc_all;
  logic [CW-1:0]    n_off_now;
  always_comb begin
    ind_on    = '0;
    miss_off  = '0;
    acc_all   = '0;
    n_off_now = '0;
    for (int i = 0; i < NB; i++) begin
      acc_all = acc_all + SUM_W'(ca[i]);
      if (!t_on[i]) begin
        ind_on[i] = (SUM_W'(cc[i]) + SUM_W'(ci[i])) * SUM_W'(1000) < SUM_W'(TH_IND_PM) * SUM_W'(ca[i]);
        miss_off  = miss_off + ((ca[i] > cc[i]) ? SUM_W'(ca[i] - cc[i]) : '0);
        n_off_now = n_off_now + 1'b1;
      end
    end
  end

  // ---- sequential ranking: pick the best candidate, one bank per cycle -------
  logic          sel_max;       // 1: largest miss count among off banks; 0: smallest C_X among on banks
  logic [CW-1:0] sel_left;      // banks still to pick
  logic [IW-1:0] sel_i, best_i;
  logic [CNT_W-1:0] best_key;
  logic          best_ok;
  logic [CNT_W-1:0] key_i;
  logic          cand_i;
  always_comb begin
    key_i  = sel_max ? ((ca[sel_i] > cc[sel_i]) ? ca[sel_i] - cc[sel_i] : '0) : cx[sel_i];
    cand_i = sel_max ? !t_on[sel_i] : (t_on[sel_i] && !just_on[sel_i]);
  end

  // ---- statistics ------------------------------------------------------------
  logic          ms_start, ms_done, ms_busy;
  logic [IW:0]   feed;
  logic [CNT_W-1:0] mu, sigma;
  mean_std_unit #(.N(NB), .W(CNT_W)) u_ms (
    .clk, .rst_n,
    .start (ms_start), .x_valid (state == S_STAT && feed < (IW+1)'(NB)),
    .x (cx[feed[IW-1:0]]),
    .mean (mu), .stddev (sigma), .done (ms_done), .busy (ms_busy)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_RUN; sel_ret <= S_RUN;
      timer <= '0; snap <= 1'b0;
      t_on <= '1; m_discard <= '1; just_on <= '0;
      mu1 <= '0; mu2 <= '0;
      sel_max <= 1'b0; sel_left <= '0; sel_i <= '0; best_i <= '0; best_key <= '0; best_ok <= 1'b0;
      ms_start <= 1'b0; feed <= '0;
      last_mean <= '0; last_std <= '0;
      n_intervals <= '0; n_nonuniform <= '0; n_consecutive <= '0;
      n_on_individual <= '0; n_on_collective <= '0;
    end else begin
      snap     <= 1'b0;
      ms_start <= 1'b0;
      // free-running interval timer; the policy runs in the background
      timer <= (timer == INTERVAL - 1) ? '0 : timer + 1'b1;
      unique case (state)
        S_RUN: begin
          if (timer == INTERVAL - 1) begin
            snap  <= 1'b1;
            state <= S_ON_IND;
          end
        end
        S_ON_IND: if (!snap) begin      // counters are latched by now
          n_intervals <= n_intervals + 1'b1;
          t_on    <= t_on | ind_on;
          just_on <= ind_on;
          if (|ind_on) n_on_individual <= n_on_individual + 1'b1;
          state   <= S_ON_COLL;
        end
        S_ON_COLL: begin
          // miss_off and n_off_now now see the banks turned on just before
          if (n_off_now != '0 && miss_off * SUM_W'(1000) > SUM_W'(TH_T_PM) * acc_all &&
              (n_off_now >> 1) != '0) begin
            n_on_collective <= n_on_collective + 1'b1;
            sel_max  <= 1'b1;
            sel_left <= n_off_now >> 1;
            sel_i <= '0; best_ok <= 1'b0;
            sel_ret  <= S_STAT;
            state    <= S_SEL;
          end else begin
            state    <= S_STAT;
            ms_start <= 1'b1;
            feed     <= '0;
          end
        end
        S_SEL: begin
          if (cand_i && (!best_ok || (sel_max ? key_i > best_key : key_i < best_key))) begin
            best_ok <= 1'b1; best_i <= sel_i; best_key <= key_i;
          end
          sel_i <= sel_i + 1'b1;
          if (sel_i == IW'(NB - 1)) begin
            // final comparison includes bank NB-1 itself
            if (cand_i && (!best_ok || (sel_max ? key_i > best_key : key_i < best_key))) begin
              if (sel_max) begin t_on[sel_i] <= 1'b1; just_on[sel_i] <= 1'b1; end
              else begin t_on[sel_i] <= 1'b0; m_discard[sel_i] <= 1'b0; end
            end else if (best_ok) begin
              if (sel_max) begin t_on[best_i] <= 1'b1; just_on[best_i] <= 1'b1; end
              else begin t_on[best_i] <= 1'b0; m_discard[best_i] <= 1'b0; end
            end
            sel_left <= sel_left - 1'b1;
            best_ok  <= 1'b0;
            sel_i    <= '0;
            if (sel_left == CW'(1) || !(best_ok || cand_i)) begin
              state <= sel_ret;
              if (sel_ret == S_STAT) begin ms_start <= 1'b1; feed <= '0; end
            end
          end
        end
        S_STAT: begin
          // ms_busy falls with done; it is only observed through done here
          if (feed < (IW+1)'(NB) && !ms_start) feed <= feed + 1'b1;
          if (ms_done) begin
            last_mean <= mu;
            last_std  <= sigma;
            state     <= S_DECIDE;
          end
        end
        S_DECIDE: begin
          state <= S_RUN;
          mu2 <= mu1;
          mu1 <= mu;
          if (sigma > mu) begin
            // (i) non-uniform accesses in this interval: cold banks off, discard
            n_nonuniform <= n_nonuniform + 1'b1;
            for (int i = 0; i < NB; i++) begin
              if (cx[i] < mu && !just_on[i] && t_on[i]) begin
                t_on[i] <= 1'b0;
                m_discard[i] <= 1'b1;
              end
            end
          end else if ((CNT_W+1)'(mu2) > ((CNT_W+1)'(mu) << 1) && n_off_now < CW'(N_OFF)) begin
            // (ii) non-uniform across consecutive intervals: lowest C_X off, migrate
            n_consecutive <= n_consecutive + 1'b1;
            sel_max  <= 1'b0;
            sel_left <= CW'(N_OFF) - n_off_now;
            sel_i <= '0; best_ok <= 1'b0;
            sel_ret  <= S_RUN;
            state    <= S_SEL;
          end
        end
        default: state <= S_RUN;
      endcase
    end
  end
  // The policy must finish within one interval.
  a_policy_in_time: assert property (@(posedge clk) disable iff (!rst_n)
    (timer == INTERVAL - 1) |-> state == S_RUN);
endmodule
