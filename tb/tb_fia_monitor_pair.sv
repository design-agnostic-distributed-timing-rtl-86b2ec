// tb_fia_monitor_pair: self-checking test of the two-monitor arrangement.
// M1 watches the clock's high phase, M2 (on the inverted clock) its low
// phase.  The test clock is event-timed, so single phases can be made long
// or short.  Expected per-monitor alerts follow from which phase a glitch
// disturbs: a long high phase or a short high phase is M1's, a long or short
// low phase is M2's.  After each glitch both monitors are reset and relocked
// to clear the sticky alerts.  Checked: both lock and report ready; no alert
// on a clean clock; each of four glitches raises exactly the expected
// monitor's alert and the combined glitch output; each monitor's same-cycle
// alert pulses exactly for its two glitches; error stays low.
`timescale 1ps/1ps
module tb_fia_monitor_pair;
  import fia_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [ACC_W-1:0] w_neg = 4'd1, w_pos = 4'd1;
  skip_cfg_t skip = SKIP_DEFAULT;
  logic ready, error, glitch;
  logic [1:0] glitch_m, alert_m;
  cdl_cfg_t cfg_m1, cfg_m2;
  int checks = 0, failures = 0;
  int unsigned t_high = 1990, t_low = 2010;
  int unsigned g_high = 0, g_low = 0;   // one-shot glitch phase lengths
  bit g_arm = 0;

  fia_monitor_pair dut (.*);

  // same-cycle alerts seen from each monitor once both are locked
  int n_a1 = 0, n_a2 = 0;
  always @(posedge alert_m[0]) if (ready) n_a1++;
  always @(posedge alert_m[1]) if (ready) n_a2++;

  always begin
    int unsigned h, l;
    h = t_high; l = t_low;
    if (g_arm) begin
      if (g_high != 0) h = g_high;
      if (g_low  != 0) l = g_low;
      g_arm = 0;
    end
    clk = 1'b1; #(h);
    clk = 1'b0; #(l);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (t=%0t glitch_m=%b ready=%b)", what, $time, glitch_m, ready);
    end
  endtask

  task automatic relock;
    int n;
    @(negedge clk) rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    n = 0;
    while (!ready && n < 200) begin @(posedge clk); n++; end
    check(ready && !error, "both monitors lock");
    repeat (20) @(posedge clk);
    check(!glitch && glitch_m == 2'b00, "no alert on the clean clock");
  endtask

  task automatic one_glitch(input int unsigned gh, input int unsigned gl,
                            input logic [1:0] expect_m, input string name);
    relock();
    @(negedge clk);
    g_high = gh; g_low = gl; g_arm = 1;
    repeat (6) @(posedge clk);
    check(glitch_m == expect_m, {name, ": expected monitor alerts"});
    check(glitch == 1'b1, {name, ": combined glitch output"});
  endtask

  initial begin
    one_glitch(6000, 0, 2'b01, "long high phase");
    one_glitch(0, 6000, 2'b10, "long low phase");
    one_glitch(1500, 0, 2'b01, "short high phase");
    one_glitch(0, 1500, 2'b10, "short low phase");
    check(!error, "no lock error");
    check(n_a1 == 2 && n_a2 == 2, $sformatf("two same-cycle alerts per monitor (M1 %0d, M2 %0d)", n_a1, n_a2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd20_000_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
