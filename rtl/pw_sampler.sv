// pw_sampler: converts the three delay-line pulses into the comparison
// results R_Min, R_L and R_Max.
//
// For each of P_Min, P_L, P_Max one flip-flop with its data input tied high
// is set by the rising clock edge and cleared asynchronously by the pulse,
// giving D_x = "clock rose, delayed pulse not yet arrived".  A second
// flip-flop samples D_x on the falling clock edge, giving R_x.  So R_x = 1
// when the clock-high time was shorter than the delay to P_x.  In normal
// operation R_Min = 0 (pulse width above the minimum) and R_Max = 1 (below
// the maximum); R_L is the lock error used by the FSM.
// The two flip-flop columns follow the paper's monitor schematic.  The
// monitor reset, which puts the R flip-flops into their normal state
// (R_Min = 0, R_L = 0, R_Max = 1), is this design's choice.
`timescale 1ps/1ps
module pw_sampler (
  input  logic clk,
  input  logic rst_n,
  input  logic p_min,
  input  logic p_l,
  input  logic p_max,
  output logic d_min,
  output logic d_l,
  output logic d_max,
  output logic r_min,
  output logic r_l,
  output logic r_max
);
  always_ff @(posedge clk or posedge p_min)
    if (p_min) d_min <= 1'b0; else d_min <= 1'b1;
  always_ff @(posedge clk or posedge p_l)
    if (p_l)   d_l   <= 1'b0; else d_l   <= 1'b1;
  always_ff @(posedge clk or posedge p_max)
    if (p_max) d_max <= 1'b0; else d_max <= 1'b1;

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_min <= 1'b0;
      r_l   <= 1'b0;
      r_max <= 1'b1;
    end else begin
      r_min <= d_min;
      r_l   <= d_l;
      r_max <= d_max;
    end
  end
endmodule
