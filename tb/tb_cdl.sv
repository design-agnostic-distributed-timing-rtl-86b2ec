// tb_cdl: checks the whole configurable delay line against the stage
// formulas for random settings, with and without the two bypasses:
//   P_Min = (byp_c ? 70 : 130 + 500*C) + 100*(M+1) + (byp_f ? 130 : 295 + 10*F)
//   P_L   = P_Min + 100*(w_neg+1),  P_Max = P_L + 100*(w_pos+1)     [ps]
// It also checks Count_RO and that the ring oscillator does not run while
// the coarse stage is bypassed.
`timescale 1ps/1ps
module tb_cdl;
  import fia_pkg::*;
  logic clk = 1'b0, p_min, p_l, p_max;
  cdl_cfg_t cfg = '0;
  logic [3:0] w_neg = '0, w_pos = '0;
  logic [8:0] count_ro;
  int checks = 0, failures = 0;
  longint t0, tmin, tl, tmax;
  int ro_edges;

  cdl dut (.*);

  always @(posedge p_min) tmin = $time;
  always @(posedge p_l)   tl   = $time;
  always @(posedge p_max) tmax = $time;
  always @(posedge dut.u_coarse.ro) ro_edges++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int e_min, e_l, e_max, hi;
    #1000;
    for (int n = 0; n < 40; n++) begin
      cfg.byp_c = (n % 4 == 1) || (n % 4 == 3);
      cfg.byp_f = (n % 4 >= 2);
      cfg.c_cfg = 9'($urandom_range(0, 6));
      cfg.m_cfg = 3'($urandom_range(0, 7));
      cfg.f_cfg = 4'($urandom_range(0, 15));
      w_neg = 4'($urandom_range(0, 15));
      w_pos = 4'($urandom_range(0, 15));
      e_min = (cfg.byp_c ? 70 : 130 + 500 * int'(cfg.c_cfg)) + 100 * (int'(cfg.m_cfg) + 1)
              + (cfg.byp_f ? 130 : 295 + 10 * int'(cfg.f_cfg));
      e_l   = e_min + 100 * (int'(w_neg) + 1);
      e_max = e_l + 100 * (int'(w_pos) + 1);
      hi = 500 * int'(cfg.c_cfg) + 700;
      tmin = 0; tl = 0; tmax = 0; ro_edges = 0;
      #1000;
      t0 = $time; clk = 1'b1;
      #(hi) clk = 1'b0;
      #(8000);
      check(tmin - t0 == e_min, $sformatf("P_Min delay case %0d", n));
      check(tl - t0 == e_l, $sformatf("P_L delay case %0d", n));
      check(tmax - t0 == e_max, $sformatf("P_Max delay case %0d", n));
      if (cfg.byp_c) check(ro_edges == 0, "ring oscillator off when bypassed");
      else           check(int'(count_ro) == (hi - 1) / 500, "Count_RO");
    end
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
