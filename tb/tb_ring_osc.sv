// tb_ring_osc: checks the gated ring-oscillator model: first rising edge one
// period (500 ps) after enable, one rising edge per period while enabled,
// output high and quiet while disabled.
`timescale 1ps/1ps
module tb_ring_osc;
  logic en = 1'b0, ro;
  int checks = 0, failures = 0;
  int rises = 0;
  longint t_en, t_first;

  ring_osc dut (.en(en), .ro(ro));

  always @(posedge ro) begin
    rises++;
    if (rises == 1) t_first = $time;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #1000;
    check(ro == 1'b1, "output high while disabled");
    rises = 0;
    t_en = $time; en = 1'b1;
    #2100;
    check(rises == 4, "four rising edges in 2100 ps");
    check(t_first - t_en == 500, "first rising edge one period after enable");
    en = 1'b0;
    #300;
    check(ro == 1'b1, "output returns high after disable");
    rises = 0;
    #2000;
    check(rises == 0, "no edges while disabled");
    rises = 0; t_en = $time; en = 1'b1;
    #(500 * 20 + 100);
    check(rises == 20, "twenty periods of 500 ps");
    en = 1'b0;
    #1000;
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
