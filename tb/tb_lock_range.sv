// tb_lock_range: locking-range workload for one monitor.
//
// The monitor is locked to 50 % duty clocks from 2 MHz (250 ns high phase,
// the low end of the range, coarse count near 500 of 511) up to 1.2 GHz
// (417 ps high phase, both coarse and fine stages bypassed).  For each
// frequency the bench resets the monitor, waits for ready, and checks with
// the stage delay formulas written out here that P_L sits just below the
// high time (within one fine step, or one medium step when the fine stage is
// bypassed), that the bypass bits match the frequency band, and that a
// further 30 clean cycles raise no alert.  Lock cycle counts are printed.
// The low-frequency window is set wide (w = 15) so that ordinary settings are
// used; the high-frequency cases use w = 0 to reach the shortest line.
`timescale 1ps/1ps
module tb_lock_range;
  import fia_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [ACC_W-1:0] w_neg = 4'd1, w_pos = 4'd1;
  skip_cfg_t skip = SKIP_DEFAULT;
  logic ready, error, alert, glitch, r_min, r_l, r_max;
  cdl_cfg_t cfg;
  lock_state_t state;
  int checks = 0, failures = 0;
  longint unsigned t_half = 2000;
  longint unsigned ncyc = 0;

  fia_monitor dut (.*);

  always begin
    clk = 1'b1; ncyc++; #(t_half);
    clk = 1'b0;         #(t_half);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (half=%0d c=%0d m=%0d f=%0d bc=%0b bf=%0b st=%s)", what, t_half,
               cfg.c_cfg, cfg.m_cfg, cfg.f_cfg, cfg.byp_c, cfg.byp_f, state.name());
    end
  endtask

  function automatic longint pl_delay(cdl_cfg_t c, int wn);
    return (c.byp_c ? 70 : 130 + 500 * longint'(c.c_cfg)) + 100 * (longint'(c.m_cfg) + 1)
           + (c.byp_f ? 130 : 295 + 10 * longint'(c.f_cfg)) + 100 * (wn + 1);
  endfunction

  task automatic lock_at(input longint unsigned half, input int w,
                         input bit exp_bc, input bit exp_bf);
    longint unsigned c0;
    longint d, step;
    t_half = half; w_neg = ACC_W'(w); w_pos = ACC_W'(w);
    @(negedge clk) rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    c0 = ncyc;
    while (!ready && !error && ncyc - c0 < 100) @(posedge clk);
    $display("%0.2f MHz: lock in %0d cycles, c=%0d m=%0d f=%0d bc=%0b bf=%0b", 1.0e6 / (2.0 * half),
             ncyc - c0, cfg.c_cfg, cfg.m_cfg, cfg.f_cfg, cfg.byp_c, cfg.byp_f);
    check(ready && !error, $sformatf("locks with a %0d ps high phase", half));
    check(ncyc - c0 >= 7 && ncyc - c0 <= 30, "lock time 7..30 cycles");
    check(cfg.byp_c == exp_bc && cfg.byp_f == exp_bf, "bypass bits for this band");
    d = pl_delay(cfg, w);
    step = cfg.byp_f ? 100 : 10;
    check(d <= longint'(half) + 10 && d > longint'(half) - step - 20, "P_L just below the high time");
    repeat (30) @(posedge clk);
    check(!glitch, "no alert on the clean clock");
  endtask

  initial begin
    lock_at(250_000, 15, 0, 0);   // 2 MHz
    lock_at(50_000, 15, 0, 0);    // 10 MHz
    lock_at(5_000, 1, 0, 0);      // 100 MHz
    lock_at(2_000, 1, 0, 0);      // 250 MHz
    lock_at(1_100, 1, 0, 0);      // 455 MHz
    lock_at(700, 1, 1, 0);        // 714 MHz
    lock_at(417, 0, 1, 1);        // 1.2 GHz
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd200_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
