// tb_pw_lock_fsm: tests the locking FSM alone against an ideal delay-line
// model written here.  Every cycle the model computes, from the FSM's current
// setting, the delay to P_L and returns R_L = (delay > high time) at the
// falling edge, and Count_RO = number of whole 500 ps periods in the high
// time, exactly as the delay line would.  Checked: coarse in one cycle;
// lock time within 7..27 cycles (1 coarse + 3..9 medium + 3..17 fine, plus
// restarts when the coarse guess is too long); the locked setting is the
// largest one not longer than the high time; coarse, then fine bypass for
// short pulses; the error stop; tracking up and down with voting; medium
// and coarse carries using the skip values; monotonic delay in tracking.
`timescale 1ps/1ps
module tb_pw_lock_fsm;
  import fia_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1, r_l = 1'b0;
  logic [COARSE_BITS-1:0] count_ro = '0;
  skip_cfg_t skip;
  cdl_cfg_t cfg;
  lock_state_t state;
  logic ready, error;
  int checks = 0, failures = 0;
  int pw = 2000;    // clock-high time of the modelled clock, ps
  int wn = 1;       // window line setting in front of P_L
  int n_up = 0, n_down = 0, n_mcarry = 0, n_ccarry = 0, n_nonmono = 0;

  pw_lock_fsm dut (.*);

  function automatic int delay_l(cdl_cfg_t c);
    return (c.byp_c ? 70 : 130 + 500 * int'(c.c_cfg)) + 100 * (int'(c.m_cfg) + 1)
           + (c.byp_f ? 130 : 295 + 10 * int'(c.f_cfg)) + 100 * (wn + 1);
  endfunction

  // clock with a 10 ns period; the model answers at the falling edge
  always begin
    #5000 clk = 1'b1;
    #5000 clk = 1'b0;
    r_l      = delay_l(cfg) > pw;
    count_ro = COARSE_BITS'((pw - 1) / 500);
  end

  // tracking statistics
  cdl_cfg_t prev;
  always @(posedge clk) begin
    #1;
    if (ready && prev != cfg) begin
      if (delay_l(cfg) > delay_l(prev)) n_up++; else n_down++;
      if (delay_l(cfg) < delay_l(prev) && cfg.m_cfg != prev.m_cfg && cfg.c_cfg == prev.c_cfg
          && cfg.m_cfg > prev.m_cfg) n_nonmono++;
      if (cfg.m_cfg == prev.m_cfg + 1 && cfg.c_cfg == prev.c_cfg) n_mcarry++;
      if (cfg.c_cfg == prev.c_cfg + 1) n_ccarry++;
    end
    prev = cfg;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (pw=%0d c=%0d m=%0d f=%0d bc=%0b bf=%0b st=%s)", what, pw,
               cfg.c_cfg, cfg.m_cfg, cfg.f_cfg, cfg.byp_c, cfg.byp_f, state.name());
    end
  endtask

  task automatic lock(output int cycles);
    @(negedge clk) rst_n = 1'b0;
    @(negedge clk) rst_n = 1'b1;
    cycles = 0;
    while (!ready && !error && cycles < 100) begin @(posedge clk); cycles++; end
  endtask

  // the locked setting: not longer than pw, and the next fine step would be
  function automatic bit locked_ok(int step);
    return delay_l(cfg) <= pw && delay_l(cfg) + step > pw;
  endfunction

  initial begin
    int cyc;
    // skip values matched to the ideal model: a carry never lowers the delay
    skip = '{c_medium: 3, c_fine: 5, m_fine: 5};

    // ---- lock over a range of high times -----------------------------
    for (int k = 0; k < 24; k++) begin
      pw = 1100 + k * 137;
      lock(cyc);
      check(ready, $sformatf("locks at high time %0d", pw));
      check(cyc >= 7 && cyc <= 27, $sformatf("lock time %0d cycles", cyc));
      check(!cfg.byp_c && !cfg.byp_f, "no bypass for long pulses");
      check(locked_ok(10), "locked to the largest setting below the high time");
    end

    // ---- a fast lock: exactly 7 cycles when the guesses are right ----
    wn = 0; pw = 130 + 500 * 2 + 100 * 2 + 295 + 10 * 1 + 100 + 5;   // 1740
    lock(cyc);
    check(ready && cyc >= 7 && cyc <= 15, $sformatf("short lock %0d cycles", cyc));
    wn = 1;

    // ---- short pulses: coarse bypass, then coarse and fine bypass -----
    pw = 700;
    lock(cyc);
    check(ready && cfg.byp_c && !cfg.byp_f && locked_ok(10), "coarse bypass at 700 ps");
    pw = 520;
    lock(cyc);
    check(ready && cfg.byp_c && cfg.byp_f && locked_ok(100), "both bypassed at 520 ps");
    check(cyc <= 40, "bypass lock time");
    pw = 350;
    lock(cyc);
    check(error && !ready, "error when even the bypassed line is too long");

    // ---- tracking: slow drift up across medium and coarse carries ----
    pw = 1500;
    lock(cyc);
    check(ready, "lock before tracking");
    for (int s = 0; s < 1400; s++) begin
      @(posedge clk);
      pw += 1;
      if (s % 10 == 0) check(delay_l(cfg) <= pw + 30 && delay_l(cfg) >= pw - 40, "tracking follows upward drift");
    end
    repeat (20) @(posedge clk);
    check(locked_ok(10) || delay_l(cfg) - pw <= 10, "settled after upward drift");
    for (int s = 0; s < 900; s++) begin
      @(posedge clk);
      pw -= 1;
      if (s % 10 == 0) check(delay_l(cfg) <= pw + 40 && delay_l(cfg) >= pw - 30, "tracking follows downward drift");
    end
    check(n_up > 0 && n_down > 0, "tracking stepped both ways");
    check(n_mcarry > 0, "medium carry happened");
    check(n_ccarry > 0, "coarse carry happened");
    $display("tracking: up=%0d down=%0d medium carries=%0d coarse carries=%0d", n_up, n_down, n_mcarry, n_ccarry);
    check(ready && !error, "still locked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd200_000_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
