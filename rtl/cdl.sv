// cdl: the configurable delay line (CDL) of one monitor.
//
// The clock enters a coarse stage (ring-oscillator counter, Config_C) or,
// when bypassed, a short pulse generator; then the main medium stage
// (Config_M, 8 settings); then the fine stage (Config_F) or its bypass.
// The result is P_Min.  Two further medium lines of ACC_UNITS settings each,
// set by the acceptance-window configuration, follow in series:
// P_Min -> (w_neg) -> P_L -> (w_pos) -> P_Max.  Each P_* is a pulse whose
// rising edge marks, after the rising clock edge, the minimum (P_Min), the
// locked (P_L) and the maximum (P_Max) accepted clock-high time.
//
//   delay(CLK -> P_Min) = coarse + medium + fine     (coarse = 130 ps + 500 ps * Config_C)
//   P_L   = P_Min + 100 ps * (w_neg + 1)
//   P_Max = P_L   + 100 ps * (w_pos + 1)
//
// The bypass pulse generator (clock AND NOT delayed clock, CBYP_PW_PS wide)
// also clears the coarse counter at every rising clock edge.  Bypassing the
// coarse stage holds its ring oscillator off, which is how the monitor saves
// power at high clock frequencies.
// The stage order and the two window lines after the main line follow the
// paper's delay-line schematic; the pulse generator's width, the use of its
// pulse as the counter clear, and the split of Config_ACC into two fields
// are this design's choices.
`timescale 1ps/1ps
module cdl
  import fia_pkg::*;
#(
  parameter int unsigned ACC_N = ACC_UNITS
) (
  input  logic                   clk,
  input  cdl_cfg_t               cfg,       // from the locking FSM
  input  logic [ACC_W-1:0]       w_neg,     // Config_ACC, lower window
  input  logic [ACC_W-1:0]       w_pos,     // Config_ACC, upper window
  output logic                   p_min,
  output logic                   p_l,
  output logic                   p_max,
  output logic [COARSE_BITS-1:0] count_ro
);
  logic clk_d, clk_pulse, byp_pulse;
  logic coarse_en, coarse_out, med_in, med_out, fine_out, fine_byp;
  logic [MED_UNITS-2:0] med_therm;
  logic [ACC_N-2:0]     neg_therm, pos_therm;

  // pulse at every rising clock edge
  delay_chain #(.TOTAL_PS(CBYP_PW_PS)) u_pw  (.a(clk), .y(clk_d));
  assign clk_pulse = clk & ~clk_d;
  delay_chain #(.TOTAL_PS(CBYP_DLY_PS)) u_cbyp (.a(clk_pulse), .y(byp_pulse));

  // coarse stage, gated off when bypassed
  assign coarse_en = clk & ~cfg.byp_c;
  coarse_stage u_coarse (
    .en(coarse_en), .clr(clk_pulse), .conf(cfg.c_cfg),
    .out(coarse_out), .count_ro(count_ro)
  );
  assign med_in = cfg.byp_c ? byp_pulse : coarse_out;

  // index -> thermometer code
  always_comb begin
    for (int i = 0; i < MED_UNITS - 1; i++) med_therm[i] = (i < int'(cfg.m_cfg));
    for (int i = 0; i < ACC_N - 1; i++) begin
      neg_therm[i] = (i < int'(w_neg));
      pos_therm[i] = (i < int'(w_pos));
    end
  end

  medium_stage #(.UNITS(MED_UNITS)) u_med (.a(med_in), .therm(med_therm), .y(med_out));

  fine_stage u_fine (.a(med_out), .code(cfg.f_cfg), .y(fine_out));
  delay_chain #(.TOTAL_PS(FINE_BYP_PS)) u_fbyp (.a(med_out), .y(fine_byp));
  assign p_min = cfg.byp_f ? fine_byp : fine_out;

  medium_stage #(.UNITS(ACC_N)) u_acc_neg (.a(p_min), .therm(neg_therm), .y(p_l));
  medium_stage #(.UNITS(ACC_N)) u_acc_pos (.a(p_l),   .therm(pos_therm), .y(p_max));
endmodule
