// coarse_stage: ring-oscillator counting delay stage of the configurable delay
// line, and the pulse-width timer used for coarse calibration.
//
// While the enable (the clock, unless the coarse stage is bypassed) is high,
// a gated ring oscillator runs and a BITS-wide counter counts its rising
// edges.  When the count equals conf, the comparator output goes high.  A
// fixed comparator/output path of OFS_PS follows, and an edge-to-pulse
// shaper turns the comparator's rising edge into a pulse of PW_PS, so that
// the pulse travelling down the line never reaches into the next clock
// cycle unless the delay itself does.  The delay from
// the enable's rising edge to the output is OFS_PS + conf * T_RO.
// When the enable falls the oscillator stops and the count is frozen (the
// "Stop" input of the counter), so count_ro holds the number of oscillator
// periods that fitted in the last clock-high phase; the locking FSM reads it
// at the next rising clock edge.  clr, a short pulse at each rising clock
// edge, clears the counter at the start of the next measurement.
// The counter saturates at its maximum instead of wrapping, so an over-long
// pulse cannot alias to a short delay (this design's choice).
// Structure follows the paper's coarse-stage schematic (RO, counter with
// stop, equality comparator); the saturating counter, the clear pulse and
// the output pulse shaper are this design's choices.
`timescale 1ps/1ps
module coarse_stage #(
  parameter int unsigned BITS    = fia_pkg::COARSE_BITS,
  parameter int unsigned HALF_PS = fia_pkg::RO_HALF_PS,
  parameter int unsigned OFS_PS  = fia_pkg::COARSE_OFS_PS,
  parameter int unsigned PW_PS   = fia_pkg::CBYP_PW_PS
) (
  input  logic            en,        // clock, gated off when bypassed
  input  logic            clr,       // pulse at every rising clock edge
  input  logic [BITS-1:0] conf,      // Config_C
  output logic            out,       // delayed pulse to the medium stage
  output logic [BITS-1:0] count_ro   // Count_RO, valid while en is low
);
  logic ro;
  logic [BITS-1:0] cnt;
  logic match, match_d, match_dd;

  ring_osc #(.HALF_PS(HALF_PS)) u_ro (.en(en), .ro(ro));

  always_ff @(posedge ro or posedge clr) begin
    if (clr)                     cnt <= '0;
    else if (en && (cnt != '1))  cnt <= cnt + 1'b1;
  end

  assign match    = en & (cnt == conf);
  assign count_ro = cnt;

  delay_chain #(.TOTAL_PS(OFS_PS)) u_ofs (.a(match),   .y(match_d));
  delay_chain #(.TOTAL_PS(PW_PS))  u_pw  (.a(match_d), .y(match_dd));
  assign out = match_d & ~match_dd;
endmodule
