// pw_lock_fsm: the pulse-width locking FSM ("PW Lock") of one monitor.
//
// It runs on the rising clock edge.  R_L, sampled at the previous falling
// edge, tells whether the delay to P_L was longer (1) or shorter (0) than the
// clock-high time with the configuration that was in force during that
// cycle, so every cycle gives one observation of the current setting.
//
// Initial lock, once after reset:
//   S_RESET   all settings zero; the coarse counter times one clock-high phase.
//   S_COARSE  Config_C = Count_RO (one cycle).
//   S_MEDIUM  linear search on Config_M: step up while R_L = 0, step down
//             when R_L = 1; done when R_L shows the pattern 0,1,0, which
//             leaves the largest setting still shorter than the pulse.
//             If the medium setting is 0 and R_L is still 1 ("stuck at
//             min"): if the coarse stage is in use with Config_C > 0,
//             Config_C is lowered by one and the medium search restarts;
//             once the whole line is at its minimum, the bypass bits
//             {Bypass_F, Bypass_C} are shifted left with a 1 coming in
//             (first the coarse stage, then also the fine stage is
//             bypassed) and the search restarts; if both are already
//             bypassed the FSM stops in S_ERROR.
//   S_FINE    the same linear search on Config_F (skipped when the fine
//             stage is bypassed).
// Then ready rises and S_TRACK follows: full-range linear tracking.  R_L is
// collected over VOTE_N cycles; the majority decides one step of the whole
// coarse/medium/fine code up or down.  Carries between the stages use the
// programmable skips: after a medium carry the fine code restarts at m_fine,
// after a coarse carry the medium and fine codes restart at c_medium and
// c_fine, so that the delay grows monotonically despite the overlap between
// stages.  A borrow is the exact reverse of a carry.
//
// From the paper: the stage order, Config_C = Count_RO, the linear search
// with the 0,1,0 end pattern, the bypass shift on a stuck minimum, the error
// stop, majority-voted full-range tracking and the three skip values.  This
// design's own choices: lowering Config_C on a stuck medium search while
// Config_C > 0 (the paper only covers the all-zero case); ending a search
// that reaches its top setting with R_L still 0 as locked there; a 5-cycle
// voting window; borrow rules; fine stuck at its minimum keeps searching;
// the ignored observation after a restart.
// Lint note: rst_n is the asynchronous reset of the state registers and also
// the disable condition of the assertions, which lint reports as a signal
// used both synchronously and asynchronously; it is intended.
`timescale 1ps/1ps
module pw_lock_fsm
  import fia_pkg::*;
#(
  parameter int unsigned VOTE_N = 5
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   r_l,
  input  logic [COARSE_BITS-1:0] count_ro,
  input  skip_cfg_t              skip,
  output cdl_cfg_t               cfg,
  output lock_state_t            state,
  output logic                   ready,
  output logic                   error
);
  localparam logic [COARSE_BITS-1:0] C_MAX = '1;
  localparam logic [MED_W-1:0]       M_MAX = MED_W'(MED_UNITS - 1);
  localparam logic [FINE_BITS-1:0]   F_MAX = '1;
  localparam int unsigned VW = $clog2(VOTE_N + 1);

  logic [1:0]    hist;      // last two R_L observations of this search
  logic [1:0]    nobs;      // observations so far, saturating at 2
  logic          settle;    // ignore one observation after a restart
  logic [VW-1:0] vote_cnt;
  logic [VW-1:0] vote_one;

  // one step up in the monotonic code order
  function automatic cdl_cfg_t step_up(cdl_cfg_t c, skip_cfg_t s);
    cdl_cfg_t n = c;
    if (!c.byp_f && c.f_cfg != F_MAX) begin
      n.f_cfg = c.f_cfg + 1'b1;
    end else if (c.m_cfg != M_MAX) begin
      n.m_cfg = c.m_cfg + 1'b1;
      if (!c.byp_f) n.f_cfg = s.m_fine;
    end else if (!c.byp_c && c.c_cfg != C_MAX) begin
      n.c_cfg = c.c_cfg + 1'b1;
      n.m_cfg = s.c_medium;
      if (!c.byp_f) n.f_cfg = s.c_fine;
    end
    return n;
  endfunction

  // one step down: the reverse of step_up
  function automatic cdl_cfg_t step_down(cdl_cfg_t c, skip_cfg_t s);
    cdl_cfg_t n = c;
    if (!c.byp_c && c.c_cfg != '0 && c.m_cfg == s.c_medium &&
        (c.byp_f || c.f_cfg == s.c_fine)) begin
      n.c_cfg = c.c_cfg - 1'b1;
      n.m_cfg = M_MAX;
      if (!c.byp_f) n.f_cfg = F_MAX;
    end else if (!c.byp_f && c.f_cfg == s.m_fine && c.m_cfg != '0) begin
      n.m_cfg = c.m_cfg - 1'b1;
      n.f_cfg = F_MAX;
    end else if (!c.byp_f && c.f_cfg != '0) begin
      n.f_cfg = c.f_cfg - 1'b1;
    end else if (c.m_cfg != '0) begin
      n.m_cfg = c.m_cfg - 1'b1;
      if (!c.byp_f) n.f_cfg = F_MAX;
    end else if (!c.byp_c && c.c_cfg != '0) begin
      n.c_cfg = c.c_cfg - 1'b1;
      n.m_cfg = M_MAX;
      if (!c.byp_f) n.f_cfg = F_MAX;
    end
    return n;
  endfunction

  logic pattern;  // 0,1,0 seen on R_L, the newest being this cycle's r_l
  assign pattern = (nobs == 2'd2) && (hist == 2'b01) && !r_l;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_RESET;
      cfg      <= '0;
      hist     <= '0;
      nobs     <= '0;
      settle   <= 1'b0;
      vote_cnt <= '0;
      vote_one <= '0;
    end else begin
      hist   <= {hist[0], r_l};
      settle <= 1'b0;
      if (nobs != 2'd2) nobs <= nobs + 1'b1;

      unique case (state)
        S_RESET: begin
          cfg   <= '0;
          state <= S_COARSE;
        end

        S_COARSE: begin
          cfg.c_cfg <= count_ro;
          cfg.m_cfg <= '0;
          cfg.f_cfg <= '0;
          nobs      <= '0;
          state     <= S_MEDIUM;
        end

        S_MEDIUM: begin
          if (settle) begin
            nobs <= '0;
          end else if (pattern || (!r_l && cfg.m_cfg == M_MAX)) begin
            nobs  <= '0;
            state <= cfg.byp_f ? S_TRACK : S_FINE;
          end else if (!r_l) begin
            cfg.m_cfg <= cfg.m_cfg + 1'b1;
          end else if (cfg.m_cfg != '0) begin
            cfg.m_cfg <= cfg.m_cfg - 1'b1;
          end else begin
            // stuck at the minimum
            nobs   <= '0;
            settle <= 1'b1;
            if (!cfg.byp_c && cfg.c_cfg != '0) begin
              cfg.c_cfg <= cfg.c_cfg - 1'b1;
            end else if (cfg.byp_c && cfg.byp_f) begin
              state <= S_ERROR;
            end else begin
              {cfg.byp_f, cfg.byp_c} <= {cfg.byp_c, 1'b1};
            end
          end
        end

        S_FINE: begin
          if (pattern || (!r_l && cfg.f_cfg == F_MAX)) begin
            state    <= S_TRACK;
            vote_cnt <= '0;
            vote_one <= '0;
          end else if (!r_l) begin
            cfg.f_cfg <= cfg.f_cfg + 1'b1;
          end else if (cfg.f_cfg != '0) begin
            cfg.f_cfg <= cfg.f_cfg - 1'b1;
          end
        end

        S_TRACK: begin
          if (vote_cnt == VW'(VOTE_N - 1)) begin
            vote_cnt <= '0;
            vote_one <= '0;
            if ((32'(vote_one) + 32'(r_l)) * 2 > VOTE_N) cfg <= step_down(cfg, skip);
            else                                         cfg <= step_up(cfg, skip);
          end else begin
            vote_cnt <= vote_cnt + 1'b1;
            vote_one <= vote_one + VW'(r_l);
          end
        end

        S_ERROR: state <= S_ERROR;

        default: state <= S_ERROR;
      endcase
    end
  end

  assign ready = (state == S_TRACK);
  assign error = (state == S_ERROR);

  // the medium code never leaves its range; ready and error exclude each other
  a_med_range: assert property (@(posedge clk) disable iff (!rst_n)
                                cfg.m_cfg <= M_MAX);
  a_ready_err: assert property (@(posedge clk) disable iff (!rst_n)
                                !(ready && error));
endmodule
