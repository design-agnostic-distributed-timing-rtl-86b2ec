// tb_coarse_stage: checks the coarse stage: output delay 130 + 500*conf ps
// after the enable rises, a 100 ps output pulse, and Count_RO equal to the
// number of whole 500 ps periods in the high phase, held while the enable is
// low.  Expected values come from the stage formula, not from the RTL.
`timescale 1ps/1ps
module tb_coarse_stage;
  logic en = 1'b0, clr = 1'b0, out;
  logic [8:0] conf = '0, count_ro;
  int checks = 0, failures = 0;
  longint t_rise, t_out, t_out_fall;
  int nout;

  coarse_stage dut (.en(en), .clr(clr), .conf(conf), .out(out), .count_ro(count_ro));

  always @(posedge out) begin nout++; t_out = $time; end
  always @(negedge out) t_out_fall = $time;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // one enable pulse of width pw with the clear pulse at its start
  task automatic pulse(input int pw);
    nout = 0;
    t_rise = $time;
    en = 1'b1; clr = 1'b1;
    #100 clr = 1'b0;
    #(pw - 100) en = 1'b0;
    #3000;
  endtask

  initial begin
    int cases [6] = '{0, 1, 2, 5, 9, 20};
    #2000;
    foreach (cases[i]) begin
      conf = 9'(cases[i]);
      pulse(500 * cases[i] + 900);
      check(nout == 1, $sformatf("one output pulse for conf=%0d", cases[i]));
      check(t_out - t_rise == 130 + 500 * cases[i], $sformatf("delay for conf=%0d", cases[i]));
      check(t_out_fall - t_out == 100, "output pulse width 100 ps");
      check(int'(count_ro) == (500 * cases[i] + 900 - 1) / 500, $sformatf("Count_RO for conf=%0d", cases[i]));
    end
    // pulse too short for the setting: no output
    conf = 9'd6;
    pulse(2400);
    check(nout == 0, "no output when the pulse ends first");
    check(count_ro == 9'd4, "Count_RO = 4 for 2400 ps");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
