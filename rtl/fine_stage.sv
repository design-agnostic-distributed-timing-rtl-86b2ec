// fine_stage: behavioural model of the fine delay stage.
//
// In silicon the fine stage is a buffer whose output load is a bank of
// standard-cell varactors (logic-gate inputs whose capacitance depends on the
// level held on the gate's other inputs); the setting changes the load and
// so the delay by a fraction of a gate delay.  That analog loading effect has
// no RTL equivalent, so this is a simulation model with the same ports:
// an offset of OFS_PS followed by a tapped chain of STEP_PS cells, the tap
// chosen by code.  Delay = OFS_PS + code * STEP_PS (295 ps + 10 ps/step by
// default, the measured 65 nm numbers; 2^BITS settings).
`timescale 1ps/1ps
module fine_stage #(
  parameter int unsigned BITS    = fia_pkg::FINE_BITS,
  parameter int unsigned OFS_PS  = fia_pkg::FINE_OFS_PS,
  parameter int unsigned STEP_PS = fia_pkg::FINE_STEP_PS
) (
  input  logic            a,
  input  logic [BITS-1:0] code,   // Config_F
  output logic            y
);
  localparam int unsigned N = 1 << BITS;
  logic [N-1:0] tap;

  delay_chain #(.TOTAL_PS(OFS_PS)) u_ofs (.a(a), .y(tap[0]));
  for (genvar i = 1; i < N; i++) begin : g_tap
    delay_cell #(.DELAY_PS(STEP_PS)) u_c (.a(tap[i-1]), .y(tap[i]));
  end

  assign y = tap[code];
endmodule
