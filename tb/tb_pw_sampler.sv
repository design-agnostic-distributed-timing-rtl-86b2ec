// tb_pw_sampler: checks that R_x = 1 exactly when the pulse P_x arrives after
// the falling clock edge (or not at all), and R_x = 0 when it arrives before,
// for each of the three channels independently, and the reset values.
`timescale 1ps/1ps
module tb_pw_sampler;
  logic clk = 1'b0, rst_n = 1'b1, p_min = 1'b0, p_l = 1'b0, p_max = 1'b0;
  logic d_min, d_l, d_max, r_min, r_l, r_max;
  int checks = 0, failures = 0;

  pw_sampler dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // one clock cycle, high 2000 ps; pulses at the given offsets (-1: none)
  task automatic cycle(input int o_min, input int o_l, input int o_max);
    fork
      begin clk = 1'b1; #2000 clk = 1'b0; #2000; end
      if (o_min >= 0) begin #(o_min) p_min = 1'b1; #100 p_min = 1'b0; end
      if (o_l   >= 0) begin #(o_l)   p_l   = 1'b1; #100 p_l   = 1'b0; end
      if (o_max >= 0) begin #(o_max) p_max = 1'b1; #100 p_max = 1'b0; end
    join
  endtask

  initial begin
    #10 rst_n = 1'b0;
    #90;
    check(r_min == 1'b0 && r_l == 1'b0 && r_max == 1'b1, "reset values");
    #100 rst_n = 1'b1;
    for (int n = 0; n < 60; n++) begin
      int o [3];
      foreach (o[i]) o[i] = ($urandom_range(0, 9) == 0) ? -1 : int'($urandom_range(200, 3800));
      cycle(o[0], o[1], o[2]);
      check(r_min == (o[0] < 0 || o[0] > 2000), $sformatf("R_Min case %0d", n));
      check(r_l   == (o[1] < 0 || o[1] > 2000), $sformatf("R_L case %0d", n));
      check(r_max == (o[2] < 0 || o[2] > 2000), $sformatf("R_Max case %0d", n));
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
