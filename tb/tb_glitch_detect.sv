// tb_glitch_detect: checks the alert function (R_Min = 1 or R_Max = 0), that
// the stored alert is sticky, and that it is cleared and suppressed while
// ready is low.
`timescale 1ps/1ps
module tb_glitch_detect;
  logic r_min = 1'b0, r_max = 1'b1, ready = 1'b0, alert, glitch;
  int checks = 0, failures = 0;

  glitch_detect dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #100;
    check(!glitch, "cleared while not ready");
    r_min = 1'b1; #100;
    check(alert && !glitch, "no stored alert before ready");
    r_min = 1'b0; #100;
    ready = 1'b1; #100;
    for (int v = 0; v < 4; v++) begin
      {r_min, r_max} = 2'(v); #100;
      check(alert == (r_min || !r_max), $sformatf("alert function %0d", v));
      check(glitch == (v != 1), $sformatf("sticky flag after combination %0d", v));
      {r_min, r_max} = 2'b01; #100;
      check(!alert, "alert clears with normal results");
      check(glitch == (v != 1), "stored alert remains");
      ready = 1'b0; #100;
      check(!glitch, "ready low clears");
      ready = 1'b1; #100;
    end
    r_max = 1'b0; #100;
    check(glitch, "R_Max = 0 alone sets the alert");
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
