// medium_stage: path-selection delay line with thermometer-coded control.
//
// The line has UNITS unit stages.  Each unit has a forward element and a
// return element of UNIT_PS/2 each.  The signal always enters unit 0; at
// unit i, control bit therm[i] sends it on to unit i+1 (1) or turns it back
// towards the output (0).  With k ones at the bottom of therm the signal
// passes k+1 units out and back, so the delay is (k+1)*UNIT_PS:
// all-zero control passes through the first unit only, all-one control
// through all UNITS units.  UNITS settings in total (8 for the main line,
// 16 for each acceptance-window line).
// The path-selection principle and the thermometer code follow the paper;
// the unit is written here as forward element, return element and a 2:1
// selector, which is this design's own choice of cells.  The element delays
// come from delay_cell (simulation model); synthesis keeps the selectors.
`timescale 1ps/1ps
module medium_stage #(
  parameter int unsigned UNITS   = fia_pkg::MED_UNITS,
  parameter int unsigned UNIT_PS = fia_pkg::MED_UNIT_PS
) (
  input  logic             a,
  input  logic [UNITS-2:0] therm,  // thermometer code, bit 0 first
  output logic             y
);
  logic [UNITS-1:0] fwd;   // output of forward element i
  logic [UNITS-1:0] rin;   // input of return element i
  logic [UNITS-1:0] ret;   // output of return element i

  for (genvar i = 0; i < UNITS; i++) begin : g_unit
    if (i == 0) begin : g_first
      delay_cell #(.DELAY_PS(UNIT_PS / 2)) u_f (.a(a), .y(fwd[i]));
    end else begin : g_next
      delay_cell #(.DELAY_PS(UNIT_PS / 2)) u_f (.a(fwd[i-1]), .y(fwd[i]));
    end
    if (i == UNITS - 1) begin : g_end
      assign rin[i] = fwd[i];
    end else begin : g_sel
      assign rin[i] = therm[i] ? ret[i+1] : fwd[i];
    end
    delay_cell #(.DELAY_PS(UNIT_PS - UNIT_PS / 2)) u_r (.a(rin[i]), .y(ret[i]));
  end

  assign y = ret[0];
endmodule
