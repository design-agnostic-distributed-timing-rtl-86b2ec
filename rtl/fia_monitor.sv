// fia_monitor: one timing fault-injection monitor (clock replica + window).
//
// The configurable delay line replicates the clock-high time: the locking
// FSM tunes it so that P_L arrives just before the falling clock edge.  Two
// window lines put P_Min before and P_Max after P_L.  At every falling edge
// the sampler tells whether the clock fell after P_Min and before P_Max; if
// not, glitch_detect raises an alert in that same cycle and keeps it.
// A clock glitch changes the clock-high time; a supply, EM or temperature
// attack changes the delay of the (local) delay line; both move the falling
// edge out of the window.
//
// Interface: clk is the monitored clock (use the inverted clock to monitor
// the low phase); rst_n restarts the initial lock; w_neg/w_pos set the
// acceptance window (Config_ACC), skip the configuration skips.  ready rises
// when the initial lock is done (7 to about 27 clock cycles after reset),
// error when no lock is possible.  cfg shows the current delay setting.
// Built as in the paper's monitor schematic: CDL, sampler flip-flops, PW Lock
// FSM, glitch detection.
// Lint note: ready is a synchronous FSM output and also the asynchronous
// clear of the sticky glitch flag; that is intended (the flag is cleared
// for as long as the monitor is not locked), so the sync/async mix on it
// stands.
`timescale 1ps/1ps
module fia_monitor
  import fia_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic [ACC_W-1:0] w_neg,
  input  logic [ACC_W-1:0] w_pos,
  input  skip_cfg_t        skip,
  output logic             ready,
  output logic             error,
  output logic             alert,
  output logic             glitch,
  output cdl_cfg_t         cfg,
  output lock_state_t      state,
  output logic             r_min,
  output logic             r_l,
  output logic             r_max
);
  logic p_min, p_l, p_max;
  logic [COARSE_BITS-1:0] count_ro;

  cdl u_cdl (
    .clk(clk), .cfg(cfg), .w_neg(w_neg), .w_pos(w_pos),
    .p_min(p_min), .p_l(p_l), .p_max(p_max), .count_ro(count_ro)
  );

  pw_sampler u_smp (
    .clk(clk), .rst_n(rst_n), .p_min(p_min), .p_l(p_l), .p_max(p_max),
    .d_min(), .d_l(), .d_max(),
    .r_min(r_min), .r_l(r_l), .r_max(r_max)
  );

  pw_lock_fsm u_fsm (
    .clk(clk), .rst_n(rst_n), .r_l(r_l), .count_ro(count_ro), .skip(skip),
    .cfg(cfg), .state(state), .ready(ready), .error(error)
  );

  glitch_detect u_gd (
    .r_min(r_min), .r_max(r_max), .ready(ready), .alert(alert), .glitch(glitch)
  );
endmodule
