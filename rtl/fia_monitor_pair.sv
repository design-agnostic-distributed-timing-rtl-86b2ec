// fia_monitor_pair: two monitors on one clock, one per clock phase.
//
// A single monitor measures only the clock-high time, so it misses the glitch
// types that leave the high phase intact (a skipped low phase, and phase
// shifts that start in the low phase).  M1 monitors the clock, M2 the
// inverted clock, i.e. the low phase; glitch is high when either monitor has
// raised its sticky alert, and alert_m carries each monitor's same-cycle
// alert (valid right after the falling edge of that monitor's clock).  Both
// monitors share the window and skip settings.
// The pairing follows the paper; sharing one window setting is this design's
// choice.
`timescale 1ps/1ps
module fia_monitor_pair
  import fia_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic [ACC_W-1:0] w_neg,
  input  logic [ACC_W-1:0] w_pos,
  input  skip_cfg_t        skip,
  output logic             ready,     // both monitors locked
  output logic             error,     // either monitor failed to lock
  output logic             glitch,    // combined sticky alert
  output logic [1:0]       glitch_m,  // per monitor: [0] M1 high phase, [1] M2 low phase
  output logic [1:0]       alert_m,   // per monitor same-cycle alert, not latched
  output cdl_cfg_t         cfg_m1,
  output cdl_cfg_t         cfg_m2
);
  logic clk_n;
  logic [1:0] rdy, err;

  assign clk_n = ~clk;

  fia_monitor u_m1 (
    .clk(clk), .rst_n(rst_n), .w_neg(w_neg), .w_pos(w_pos), .skip(skip),
    .ready(rdy[0]), .error(err[0]), .alert(alert_m[0]), .glitch(glitch_m[0]),
    .cfg(cfg_m1), .state(), .r_min(), .r_l(), .r_max()
  );

  fia_monitor u_m2 (
    .clk(clk_n), .rst_n(rst_n), .w_neg(w_neg), .w_pos(w_pos), .skip(skip),
    .ready(rdy[1]), .error(err[1]), .alert(alert_m[1]), .glitch(glitch_m[1]),
    .cfg(cfg_m2), .state(), .r_min(), .r_l(), .r_max()
  );

  assign ready  = &rdy;
  assign error  = |err;
  assign glitch = |glitch_m;
endmodule
