// pattern_gen: shift-register clock-pattern generator of the test chip.
//
// A LEN-bit pattern circulates in a shift register clocked by a fast clock
// (2 GHz on the test chip); its bit 0 is the generated clock, so each bit
// lasts one fast-clock period (500 ps).  "11110000" repeated gives a clean
// 250 MHz clock; changing single bits inserts pulses, removes phases or
// moves edges, which is how the twelve clock-glitch types are produced.
// A new pattern written with load is held in a shadow register and takes
// effect only at the end of the current lap of the pattern, so a pattern
// change never cuts a clock phase short by itself.  The output is
// registered.  rst_n clears the pattern (output low).
// The shift-register principle and the 2 GHz / 250 MHz rates follow the
// paper's test setup; LEN and the load mechanism are this design's choices.
`timescale 1ps/1ps
module pattern_gen #(
  parameter int unsigned LEN = 64
) (
  input  logic           clk_fast,
  input  logic           rst_n,
  input  logic           load,
  input  logic [LEN-1:0] pattern,
  output logic           clk_out,
  output logic           lap      // one fast cycle at the end of each lap
);
  localparam int unsigned PW = $clog2(LEN);
  logic [LEN-1:0] sr, shadow;
  logic           pending;
  logic [PW-1:0]  pos;

  assign lap = (pos == PW'(LEN - 1));

  always_ff @(posedge clk_fast or negedge rst_n) begin
    if (!rst_n) begin
      sr      <= '0;
      shadow  <= '0;
      pending <= 1'b0;
      pos     <= '0;
      clk_out <= 1'b0;
    end else begin
      clk_out <= sr[0];
      pos     <= lap ? '0 : pos + 1'b1;
      if (lap && (pending || load)) begin
        sr      <= load ? pattern : shadow;
        pending <= 1'b0;
      end else begin
        sr <= {sr[0], sr[LEN-1:1]};
        if (load) begin
          shadow  <= pattern;
          pending <= 1'b1;
        end
      end
    end
  end
endmodule
