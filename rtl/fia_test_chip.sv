// fia_test_chip: the monitor pair as exercised on the 65 nm test chip.
//
// The monitored clock is either an external clock (clk_sel = 0) or the
// output of the on-chip shift-register pattern generator (clk_sel = 1),
// which runs from a fast clock and can produce the twelve clock-glitch
// types.  The clock drives monitor M1 directly and monitor M2 inverted; the
// combined alert is the chip's Glitch output.
// Interface: clk_fast (2 GHz) runs the pattern generator; pattern/pat_load
// write a new 64-bit pattern, taken over at the end of the current lap
// (pat_lap marks the lap's last bit); rst_n restarts both monitors' locking
// and clears the pattern.  ready/error/glitch are the pair's combined
// status, glitch_m the sticky and alert_m the same-cycle alert of each
// monitor, cfg_m1/cfg_m2 their delay settings.  mon_clk is the clock the
// monitors see: clk_ext, or the generator's registered output, which changes
// on the rising edge of clk_fast.
// The pattern generator feeding the pair and the single Glitch output follow
// the paper's clock-glitch test setup; the external-clock path and its
// selector are this design's choices (the paper's fast pulse-adder test
// circuit is not modelled here).
`timescale 1ps/1ps
module fia_test_chip
  import fia_pkg::*;
#(
  parameter int unsigned PAT_LEN = 64
) (
  input  logic               clk_ext,
  input  logic               clk_fast,
  input  logic               clk_sel,
  input  logic               rst_n,
  input  logic               pat_load,
  input  logic [PAT_LEN-1:0] pattern,
  input  logic [ACC_W-1:0]   w_neg,
  input  logic [ACC_W-1:0]   w_pos,
  input  skip_cfg_t          skip,
  output logic               mon_clk,   // clock seen by the monitors
  output logic               pat_lap,
  output logic               ready,
  output logic               error,
  output logic               glitch,
  output logic [1:0]         glitch_m,
  output logic [1:0]         alert_m,   // same-cycle alerts of M1 and M2
  output cdl_cfg_t           cfg_m1,
  output cdl_cfg_t           cfg_m2
);
  logic pat_clk;

  pattern_gen #(.LEN(PAT_LEN)) u_pg (
    .clk_fast(clk_fast), .rst_n(rst_n), .load(pat_load), .pattern(pattern),
    .clk_out(pat_clk), .lap(pat_lap)
  );

  assign mon_clk = clk_sel ? pat_clk : clk_ext;

  fia_monitor_pair u_pair (
    .clk(mon_clk), .rst_n(rst_n), .w_neg(w_neg), .w_pos(w_pos), .skip(skip),
    .ready(ready), .error(error), .glitch(glitch), .glitch_m(glitch_m), .alert_m(alert_m),
    .cfg_m1(cfg_m1), .cfg_m2(cfg_m2)
  );
endmodule
