// tb_fia_monitor: self-checking test of one monitor (delay line, sampler,
// locking FSM and alert) with an event-timed clock.
//
// The clock's high and low times are variables, so the test can lock the
// monitor at several frequencies, drift the pulse width slowly, and insert
// single short or long pulses.  Expected values are computed here from the
// stage delay formulas, independently of the RTL:
//   delay(CLK->P_L) = (byp_c ? 70 : 130 + 500*C) + 100*(M+1)
//                     + (byp_f ? 130 : 295 + 10*F) + 100*(w_neg+1)   [ps]
// Checks: lock time 7..30 cycles; locked P_L delay within one fine step
// below to one step above the high time; no alert on a clean or slowly
// drifting clock; an alert in the same cycle as a short or a long pulse;
// coarse bypass at 714 MHz, coarse and fine bypass at 1.2 GHz, the error
// stop at 1.25 GHz with a 300 ps high time.
`timescale 1ps/1ps
module tb_fia_monitor;
  import fia_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [ACC_W-1:0] w_neg = 4'd1, w_pos = 4'd1;
  skip_cfg_t skip = SKIP_DEFAULT;
  logic ready, error, alert, glitch, r_min, r_l, r_max;
  cdl_cfg_t cfg;
  lock_state_t state;

  int checks = 0, failures = 0;
  int unsigned t_high = 2000, t_low = 2000;
  longint unsigned ncyc = 0;

  fia_monitor dut (.*);

  always begin
    clk = 1'b1; ncyc++; #(t_high);
    clk = 1'b0;         #(t_low);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (t=%0t cfg c=%0d m=%0d f=%0d bc=%0b bf=%0b st=%s)", what, $time,
               cfg.c_cfg, cfg.m_cfg, cfg.f_cfg, cfg.byp_c, cfg.byp_f, state.name());
    end
  endtask

  function automatic int pl_delay(cdl_cfg_t c, int wn);
    int d;
    d = c.byp_c ? 70 : 130 + 500 * int'(c.c_cfg);
    d += 100 * (int'(c.m_cfg) + 1);
    d += c.byp_f ? 130 : 295 + 10 * int'(c.f_cfg);
    d += 100 * (wn + 1);
    return d;
  endfunction

  // reset, then wait for ready or error; returns the cycles taken
  task automatic relock(output int cycles);
    longint unsigned c0;
    rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    c0 = ncyc;
    while (!ready && !error && ncyc - c0 < 200) @(posedge clk);
    cycles = int'(ncyc - c0);
  endtask

  initial begin
    int cyc, d;
    // ---- 250 MHz, 50 % duty -------------------------------------------
    t_high = 1990; t_low = 2010;
    relock(cyc);
    $display("250MHz lock: %0d cycles, c=%0d m=%0d f=%0d", cyc, cfg.c_cfg, cfg.m_cfg, cfg.f_cfg);
    check(ready && !error, "lock at 250 MHz");
    check(cyc >= 7 && cyc <= 30, "lock time 7..30 cycles");
    d = pl_delay(cfg, int'(w_neg));
    check(d <= int'(t_high) + 10 && d >= int'(t_high) - 20, "P_L matches high time");
    check(!cfg.byp_c && !cfg.byp_f, "no bypass at 250 MHz");
    repeat (100) @(posedge clk);
    check(!glitch, "no alert on a clean clock");
    d = pl_delay(cfg, int'(w_neg));
    check(d <= int'(t_high) + 10 && d >= int'(t_high) - 20, "lock held while tracking");

    // ---- slow drift of the high time: +300 ps over 600 cycles ----------
    repeat (300) begin @(posedge clk); t_high += 1; t_low -= 1; end
    repeat (300) begin @(posedge clk); t_high += 0; end
    repeat (150) begin @(posedge clk); t_high += 1; t_low -= 1; end
    repeat (50) @(posedge clk);
    check(!glitch, "no alert under slow drift");
    d = pl_delay(cfg, int'(w_neg));
    check(d <= int'(t_high) + 10 && d >= int'(t_high) - 20, "tracking followed the drift");
    repeat (300) begin @(posedge clk); t_high -= 1; t_low += 1; end
    repeat (50) @(posedge clk);
    check(!glitch, "no alert under downward drift");

    // ---- one short high phase -> alert in the same cycle ---------------
    @(negedge clk); t_high = 1500;
    @(negedge clk); t_high = 1990 + 150; t_low = 2010 - 150;
    #50;
    check(alert && glitch, "short pulse raises the alert at its falling edge");
    t_high = 1990 + 150;
    repeat (3) @(posedge clk);

    // ---- relock, then one long high phase ------------------------------
    t_high = 1990; t_low = 2010;
    relock(cyc);
    check(ready && !glitch, "relock clears the alert");
    repeat (20) @(posedge clk);
    check(!glitch, "clean after relock");
    @(negedge clk); t_high = 2600;
    @(negedge clk); t_high = 1990;
    #50;
    check(glitch, "long pulse raises the alert at its falling edge");

    // ---- 714 MHz: coarse bypass ------------------------------------------
    t_high = 700; t_low = 700;
    relock(cyc);
    $display("714MHz lock: %0d cycles bc=%0b bf=%0b m=%0d f=%0d", cyc, cfg.byp_c, cfg.byp_f, cfg.m_cfg, cfg.f_cfg);
    check(ready && cfg.byp_c && !cfg.byp_f, "714 MHz locks with the coarse stage bypassed");
    d = pl_delay(cfg, int'(w_neg));
    check(d <= int'(t_high) + 10 && d >= int'(t_high) - 20, "P_L matches at 714 MHz");
    repeat (50) @(posedge clk);
    check(!glitch, "no alert at 714 MHz");

    // ---- 1.2 GHz: coarse and fine bypass ---------------------------------
    w_neg = 4'd0; w_pos = 4'd0;
    t_high = 450; t_low = 380;
    relock(cyc);
    $display("1.2GHz lock: %0d cycles bc=%0b bf=%0b m=%0d", cyc, cfg.byp_c, cfg.byp_f, cfg.m_cfg);
    check(ready && cfg.byp_c && cfg.byp_f, "1.2 GHz locks with both stages bypassed");
    d = pl_delay(cfg, int'(w_neg));
    check(d <= int'(t_high) && d > int'(t_high) - 100, "P_L within one medium step at 1.2 GHz");

    // ---- 300 ps high time: cannot lock -> error -----------------------------------
    t_high = 300; t_low = 500;
    relock(cyc);
    check(error && !ready, "too fast a clock stops the FSM with an error");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd30_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
