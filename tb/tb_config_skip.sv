// tb_config_skip: why the configuration skips exist.
//
// The stages of the delay line overlap: the fine range (150 ps) exceeds one
// medium step (100 ps) and the medium range (800 ps) exceeds one coarse step
// (500 ps).  A plain carry therefore lowers the delay: fine 15 -> 0 with
// medium + 1 loses 50 ps, and medium 7 -> 0, fine 15 -> 0 with coarse + 1
// loses 350 ps, more than a 200 ps window.  The bench locks one monitor at
// 250 MHz with a 200 ps window and lets the high phase drift up slowly by
// 700 ps so that tracking crosses medium and coarse carries, three times:
//   skips 0/0/0         the coarse carry drops P_Max below the falling edge:
//                       a false alert is expected;
//   skips 1/9/6         the worked example for the measured silicon: the
//                       coarse carry still drops 160 ps, inside the window,
//                       so no alert;
//   skips 3/5/5         matched to these ideal delays: no up-step lowers the
//                       delay at all, and no alert.
// The delay drop of every up-step is computed from the stage formulas
// written out here and the largest one is checked per run.
`timescale 1ps/1ps
module tb_config_skip;
  import fia_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [ACC_W-1:0] w_neg = 4'd1, w_pos = 4'd1;
  skip_cfg_t skip = '0;
  logic ready, error, alert, glitch, r_min, r_l, r_max;
  cdl_cfg_t cfg;
  lock_state_t state;
  int checks = 0, failures = 0;
  int unsigned t_high = 1990, t_low = 2010;
  int max_drop = 0, n_ccarry = 0;

  fia_monitor dut (.*);

  always begin
    clk = 1'b1; #(t_high);
    clk = 1'b0; #(t_low);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (t=%0t c=%0d m=%0d f=%0d)", what, $time, cfg.c_cfg, cfg.m_cfg, cfg.f_cfg);
    end
  endtask

  function automatic int pl_delay(cdl_cfg_t c);
    return (c.byp_c ? 70 : 130 + 500 * int'(c.c_cfg)) + 100 * (int'(c.m_cfg) + 1)
           + (c.byp_f ? 130 : 295 + 10 * int'(c.f_cfg)) + 100 * (int'(w_neg) + 1);
  endfunction

  // delay change of every up-step while tracking
  cdl_cfg_t prev;
  always @(posedge clk) begin
    #1;
    if (ready && state == S_TRACK && prev != cfg &&
        {cfg.c_cfg, cfg.m_cfg, cfg.f_cfg} > {prev.c_cfg, prev.m_cfg, prev.f_cfg}) begin
      if (pl_delay(prev) - pl_delay(cfg) > max_drop) max_drop = pl_delay(prev) - pl_delay(cfg);
      if (cfg.c_cfg != prev.c_cfg) n_ccarry++;
    end
    prev = cfg;
  end

  task automatic run(input skip_cfg_t s, output bit alerted);
    int n;
    skip = s; max_drop = 0; n_ccarry = 0;
    t_high = 1990; t_low = 2010;
    @(negedge clk) rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    n = 0;
    while (!ready && n < 100) begin @(posedge clk); n++; end
    check(ready, "lock at 250 MHz");
    repeat (700) begin @(negedge clk); t_high += 1; t_low -= 1; end
    repeat (40) @(posedge clk);
    alerted = glitch;
    $display("skips %0d/%0d/%0d: coarse carries %0d, largest drop on an up-step %0d ps, alert %0b",
             s.c_medium, s.c_fine, s.m_fine, n_ccarry, max_drop, glitch);
    check(n_ccarry > 0, "drift crossed a coarse carry");
  endtask

  initial begin
    bit a;
    run('{c_medium: 0, c_fine: 0, m_fine: 0}, a);
    check(a, "no skips: the coarse carry raises a false alert");
    check(max_drop >= 300, "no skips: the coarse carry drops the delay by about 350 ps");
    run(SKIP_DEFAULT, a);
    check(!a, "skips 1/9/6: no false alert");
    check(max_drop <= 160, "skips 1/9/6: drop at most 160 ps");
    run('{c_medium: 3, c_fine: 5, m_fine: 5}, a);
    check(!a, "matched skips: no false alert");
    check(max_drop == 0, "matched skips: delay never falls on an up-step");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd40_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
