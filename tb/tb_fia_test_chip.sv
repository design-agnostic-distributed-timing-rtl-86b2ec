// tb_fia_test_chip: end-to-end test of the test chip at its default sizes.
//
// Part 1 uses the on-chip pattern generator, as the chip's clock-glitch
// measurement does: a 2 GHz fast clock shifts a 64-bit pattern, 500 ps per
// bit, and "1111 0000" repeated gives a clean 250 MHz clock.  The bench
// keeps a queue of pattern bits made of whole clock periods and loads the
// next 64 bits at the end of every lap, so any waveform can be played
// seamlessly.  For each of the twelve glitch types (bit patterns below, one
// bit = 500 ps) and each of three detection windows (w = 1, 3, 5, i.e.
// 200, 400, 600 ps) the pair is reset and relocked, one glitch is played,
// and the monitor alerts are compared with the expected ones:
//   window 200/400 ps: every type is caught; T3, T10, T11 only by M1 (they
//   disturb only the high phase), T4, T9, T12 only by M2, the rest by both;
//   window 600 ps: the 500 ps edge shifts T5..T12 go unnoticed, while the
//   extra or missing phases T1..T4 are still caught.
// Part 2 switches to the external clock input, driven with freely timed
// phases, for the mechanisms the pattern generator cannot reach with its
// 500 ps grid: slow drift tracked by the FSM (steps up and down, medium and
// coarse carries), a 100 ps pulse added to the low phase and caught with a
// 600 ps window (the on-chip pulse adder is stood in for by the bench's clock
// process), coarse bypass at 714 MHz, coarse plus fine bypass at
// 1.11 GHz, and the error stop for a 300 ps high phase.
// Each mechanism is counted and a failure is counted for any that never
// happened.  Expected results come from the phase lengths of the played
// waveform, not from the RTL.
`timescale 1ps/1ps
module tb_fia_test_chip;
  import fia_pkg::*;
  localparam int unsigned PAT_LEN = 64;

  logic clk_ext = 1'b0, clk_fast = 1'b0, clk_sel = 1'b1, rst_n = 1'b1, pat_load = 1'b0;
  logic [PAT_LEN-1:0] pattern = '0;
  logic [ACC_W-1:0] w_neg = 4'd1, w_pos = 4'd1;
  skip_cfg_t skip = SKIP_DEFAULT;
  logic mon_clk, pat_lap, ready, error, glitch;
  logic [1:0] glitch_m, alert_m;
  cdl_cfg_t cfg_m1, cfg_m2;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_lock = 0, n_loads = 0, n_m1_only = 0, n_m2_only = 0, n_both = 0, n_missed = 0;
  int n_byp_c = 0, n_byp_f = 0, n_error = 0, n_up = 0, n_down = 0;
  int n_mcarry = 0, n_ccarry = 0, n_cdec = 0, n_padd = 0;
  int n_type[1:12];

  fia_test_chip dut (.*);

  always #250 clk_fast = ~clk_fast;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (t=%0t glitch_m=%b ready=%b error=%b)", what, $time, glitch_m, ready, error);
    end
  endtask

  // ---------------- pattern feeding ----------------
  bit q[$];
  task automatic push(input string bits);
    foreach (bits[i]) if (bits[i] == "0" || bits[i] == "1") q.push_back(bits[i] == "1");
  endtask

  always @(negedge clk_fast) begin
    pat_load <= 1'b0;
    if (!rst_n) q.delete();
    else if (pat_lap) begin
      while (q.size() < PAT_LEN) push("11110000");
      for (int i = 0; i < PAT_LEN; i++) pattern[i] <= q.pop_front();
      pat_load <= 1'b1;
      n_loads++;
    end
  end

  // coarse decrement during locking, carries and steps while tracking
  cdl_cfg_t p1;
  always @(posedge mon_clk) begin
    #1;
    if (dut.u_pair.u_m1.state == S_MEDIUM && cfg_m1.c_cfg < p1.c_cfg && !cfg_m1.byp_c) n_cdec++;
    if (ready && cfg_m1 != p1 && cfg_m1.byp_c == p1.byp_c) begin
      if ({cfg_m1.c_cfg, cfg_m1.m_cfg, cfg_m1.f_cfg} > {p1.c_cfg, p1.m_cfg, p1.f_cfg}) n_up++; else n_down++;
      if (cfg_m1.m_cfg != p1.m_cfg && cfg_m1.c_cfg == p1.c_cfg) n_mcarry++;
      if (cfg_m1.c_cfg != p1.c_cfg) n_ccarry++;
    end
    p1 = cfg_m1;
  end

  // reset the chip and lock both monitors on the selected clock
  task automatic relock(input string what);
    int n;
    @(negedge clk_fast) rst_n = 1'b0;
    #3000;
    @(negedge clk_fast) rst_n = 1'b1;
    n = 0;
    while (!ready && !error && n < 400_000) begin #1000; n++; end
    if (ready) n_lock++;
  endtask

  function automatic string glitch_bits(int t);
    case (t)
      1:  return "11110100";              // extra pulse in the low phase
      2:  return "10110000";              // high phase broken by a short low
      3:  return "1111111111110000";      // a low phase skipped: long high
      4:  return "1111000000000000";      // a high phase skipped: long low
      5:  return "1111000111110000";      // rising edge 500 ps early
      6:  return "1110000011110000";      // falling edge 500 ps early
      7:  return "1111100011110000";      // falling edge 500 ps late
      8:  return "1111000001110000";      // rising edge 500 ps late
      9:  return "1111000";               // low phase shortened, phase shift
      10: return "1110000";               // high phase shortened, phase shift
      11: return "111110000";             // high phase lengthened, phase shift
      default: return "111100000";        // low phase lengthened, phase shift
    endcase
  endfunction

  function automatic logic [1:0] expect_m(int t, int w);
    if (w >= 5 && t >= 5) return 2'b00;
    case (t)
      3, 10, 11: return 2'b01;
      4, 9, 12:  return 2'b10;
      default:   return 2'b11;
    endcase
  endfunction

  // ---------------- external clock ----------------
  int unsigned t_high = 1990, t_low = 2010;
  bit add_pulse = 0;    // one 100 ps pulse in the middle of the next low phase
  always begin
    clk_ext = 1'b1; #(t_high);
    clk_ext = 1'b0;
    if (add_pulse) begin
      add_pulse = 0;
      #(t_low / 2 - 50) clk_ext = 1'b1;
      #100              clk_ext = 1'b0;
      #(t_low - t_low / 2 - 50);
    end else #(t_low);
  end

  initial begin
    int wlist[3] = '{1, 3, 5};
    foreach (n_type[i]) n_type[i] = 0;
    // ================= part 1: glitch types via the pattern generator
    clk_sel = 1'b1;
    foreach (wlist[k]) begin
      w_neg = ACC_W'(wlist[k]); w_pos = ACC_W'(wlist[k]);
      for (int t = 1; t <= 12; t++) begin
        logic [1:0] e;
        relock("pattern");
        check(ready && !error, $sformatf("lock on the generated 250 MHz clock (w=%0d)", wlist[k]));
        #(64'd100_000);
        check(glitch_m == 2'b00, $sformatf("no alert on the clean generated clock (w=%0d T%0d)", wlist[k], t));
        push(glitch_bits(t));
        #(64'd100_000);
        e = expect_m(t, wlist[k]);
        check(glitch_m == e, $sformatf("T%0d at window %0d ps: alerts %b, expected %b",
                                       t, 100 * (wlist[k] + 1), glitch_m, e));
        check(glitch == |e, "combined glitch output");
        if (glitch_m == 2'b01) n_m1_only++;
        if (glitch_m == 2'b10) n_m2_only++;
        if (glitch_m == 2'b11) n_both++;
        if (glitch_m == 2'b00) n_missed++;
        if (glitch_m != 2'b00) n_type[t]++;
      end
    end

    // ================= part 2: external clock
    clk_sel = 1'b0;
    w_neg = 4'd1; w_pos = 4'd1;
    t_high = 1990; t_low = 2010;
    relock("ext");
    check(ready, "lock on the external 250 MHz clock");
    repeat (800) begin @(posedge clk_ext); t_high += 1; t_low -= 1; end
    repeat (800) begin @(posedge clk_ext); t_high -= 1; t_low += 1; end
    repeat (30) @(posedge clk_ext);
    check(ready && !glitch, "slow drift tracked without an alert");

    // 100 ps pulse added to the low phase, window 600 ps (wider than the pulse)
    w_neg = 4'd5; w_pos = 4'd5;
    t_high = 1990; t_low = 2010;
    relock("ext");
    repeat (20) @(posedge clk_ext);
    check(ready && !glitch, "clean before the pulse addition");
    @(posedge clk_ext) add_pulse = 1;
    repeat (3) @(posedge clk_ext);
    check(glitch_m == 2'b11, "100 ps added pulse caught by both monitors");
    if (glitch_m[0]) n_padd++;
    w_neg = 4'd1; w_pos = 4'd1;

    t_high = 700; t_low = 700;
    relock("ext");
    check(ready && cfg_m1.byp_c && !cfg_m1.byp_f, "714 MHz: coarse stage bypassed");
    if (ready && cfg_m1.byp_c) n_byp_c++;

    w_neg = 4'd0; w_pos = 4'd0;
    t_high = 450; t_low = 450;
    relock("ext");
    check(ready && cfg_m1.byp_c && cfg_m1.byp_f, "1.11 GHz: coarse and fine stages bypassed");
    if (ready && cfg_m1.byp_f) n_byp_f++;

    t_high = 300; t_low = 500;
    relock("ext");
    check(error && !ready, "300 ps high phase: error stop");
    if (error) n_error++;

    // ================= mechanism coverage
    $display("locks=%0d loads=%0d M1-only=%0d M2-only=%0d both=%0d missed=%0d",
             n_lock, n_loads, n_m1_only, n_m2_only, n_both, n_missed);
    $display("bypass coarse=%0d fine=%0d error=%0d steps up=%0d down=%0d carries medium=%0d coarse=%0d coarse-decrements=%0d",
             n_byp_c, n_byp_f, n_error, n_up, n_down, n_mcarry, n_ccarry, n_cdec);
    check(n_lock > 0, "mechanism: lock");
    check(n_loads > 0, "mechanism: pattern load");
    check(n_m1_only > 0, "mechanism: alert from M1 only");
    check(n_m2_only > 0, "mechanism: alert from M2 only");
    check(n_both > 0, "mechanism: alert from both monitors");
    check(n_missed > 0, "mechanism: glitch inside the window ignored");
    for (int t = 1; t <= 12; t++) check(n_type[t] > 0, $sformatf("mechanism: glitch type T%0d detected", t));
    check(n_padd > 0, "mechanism: 100 ps pulse addition detected");
    check(n_byp_c > 0, "mechanism: coarse bypass");
    check(n_byp_f > 0, "mechanism: fine bypass");
    check(n_error > 0, "mechanism: error stop");
    check(n_up > 0 && n_down > 0, "mechanism: tracking steps both ways");
    check(n_mcarry > 0, "mechanism: medium carry");
    check(n_ccarry > 0, "mechanism: coarse carry");
    check(n_cdec > 0, "mechanism: coarse decrement during lock");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd100_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
