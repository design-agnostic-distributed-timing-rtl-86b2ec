// tb_medium_stage: checks the path-selection line: with k ones in the
// thermometer code the delay is (k+1)*100 ps, for the 8-setting main line and
// for a 16-setting window line.
`timescale 1ps/1ps
module tb_medium_stage;
  logic a = 1'b0, y8, y16;
  logic [6:0]  th8  = '0;
  logic [14:0] th16 = '0;
  int checks = 0, failures = 0;
  longint t8, t16;

  medium_stage #(.UNITS(8))  dut8  (.a(a), .therm(th8),  .y(y8));
  medium_stage #(.UNITS(16)) dut16 (.a(a), .therm(th16), .y(y16));

  always @(posedge y8)  t8  = $time;
  always @(posedge y16) t16 = $time;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    longint t0;
    #1000;
    for (int k = 0; k < 16; k++) begin
      th8  = (k < 8) ? 7'((1 << k) - 1) : 7'h7f;
      th16 = 15'((1 << k) - 1);
      #500;
      t0 = $time; a = 1'b1;
      #200 a = 1'b0;
      #2500;
      if (k < 8) check(t8 - t0 == 100 * (k + 1), $sformatf("8-unit delay k=%0d", k));
      check(t16 - t0 == 100 * (k + 1), $sformatf("16-unit delay k=%0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
