// glitch_detect: same-cycle alert generation of one monitor.
//
// The comparison results are legal only when R_Min = 0 and R_Max = 1, that
// is, when the clock fell after P_Min and before P_Max.  Any other
// combination is an alert.  The alert clocks a flip-flop whose data input is
// tied high, so glitch rises in the same clock cycle as the out-of-window
// clock edge and stays high (sticky) until ready falls (the monitor is reset
// or relocks).  Before the delay line is locked (ready = 0) no alert is
// kept.
// Structure follows the paper's glitch-detection schematic (alert logic
// driving the clock of a set-only flip-flop reset by Ready).
`timescale 1ps/1ps
module glitch_detect (
  input  logic r_min,
  input  logic r_max,
  input  logic ready,
  output logic alert,    // unregistered out-of-window indication
  output logic glitch    // sticky alert
);
  assign alert = r_min | ~r_max;

  always_ff @(posedge alert or negedge ready) begin
    if (!ready) glitch <= 1'b0;
    else        glitch <= 1'b1;
  end
endmodule
