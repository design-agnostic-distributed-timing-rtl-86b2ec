// ring_osc: behavioural model of the enable-gated free-running ring
// oscillator inside the coarse delay stage.
//
// In silicon this is an odd ring of inverting standard cells with an enable
// input; it has no logic function that RTL can express, so this file is a
// simulation model with the real part's ports: a single NAND fed back on
// itself through a delay of HALF_PS.  While en is low the output
// rests high.  When en rises the output falls after HALF_PS and then toggles
// every HALF_PS, so its rising edges come HALF_PS*2, HALF_PS*4, ... after the
// enable.  When en falls the output returns high HALF_PS later and stays
// there (that last rising edge comes after en has fallen; the counter
// ignores it because its count enable is low).  At power-up the output
// settles high within HALF_PS.
// Period 2*HALF_PS = 500 ps by default, equal to the coarse step of the
// measured 65 nm monitor.
`timescale 1ps/1ps
module ring_osc #(
  parameter int unsigned HALF_PS = fia_pkg::RO_HALF_PS
) (
  input  logic en,
  output logic ro
);
  // one enable NAND closing the loop; its delay stands for the half period
  // of the whole ring
  assign #(HALF_PS) ro = ~(en & ro);
endmodule
