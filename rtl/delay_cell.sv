// delay_cell: behavioural model of one standard-cell delay element (a buffer).
//
// This is a simulation model, not synthesizable timing: the output follows
// the input after DELAY_PS picoseconds.  The delay is inertial, as in a real
// gate: an input pulse narrower than DELAY_PS is swallowed.  Synthesis sees a
// wire; in silicon the delay comes from the placed cell.  All delay lines of
// the monitor are built from chains of this cell so that their timing can be
// simulated event by event.
`timescale 1ps/1ps
module delay_cell #(
  parameter int unsigned DELAY_PS = 50
) (
  input  logic a,
  output logic y
);
  assign #(DELAY_PS) y = a;
endmodule
