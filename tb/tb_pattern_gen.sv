// tb_pattern_gen: self-checking test of the shift-register clock-pattern
// generator.  A reference model here keeps its own copy of the circulating
// pattern and predicts clk_out one fast cycle after the register bit (the
// output is registered).  Checked: output low after reset; a pattern loaded
// mid-lap takes effect only at the lap boundary; each bit lasts one fast
// cycle; lap pulses once every LEN cycles; random patterns over many laps.
`timescale 1ps/1ps
module tb_pattern_gen;
  localparam int unsigned LEN = 64;
  logic clk_fast = 1'b0, rst_n = 1'b1, load = 1'b0;
  logic [LEN-1:0] pattern = '0;
  logic clk_out, lap;
  int checks = 0, failures = 0;

  pattern_gen #(.LEN(LEN)) dut (.*);

  always #250 clk_fast = ~clk_fast;   // 2 GHz, 500 ps per pattern bit

  // reference model
  logic [LEN-1:0] m_sr = '0, m_shadow = '0;
  bit m_pend = 0;
  int m_pos = 0;
  logic m_out = 1'b0;
  int laps = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // drive-and-compare loop at the falling edge of the fast clock
  // called at a falling edge, returns at the next falling edge
  task automatic step(input bit ld, input logic [LEN-1:0] p);
    check(clk_out === m_out, $sformatf("clk_out pos %0d", m_pos));
    check(lap === (m_pos == LEN - 1), "lap position");
    load = ld; pattern = p;
    @(posedge clk_fast);
    // model update, same rules as the register but written independently
    m_out = m_sr[0];
    if (m_pos == LEN - 1) begin
      laps++;
      if (ld) m_sr = p;
      else if (m_pend) m_sr = m_shadow;
      else m_sr = {m_sr[0], m_sr[LEN-1:1]};
      if (ld || m_pend) m_pend = 0;
      m_pos = 0;
    end else begin
      m_sr = {m_sr[0], m_sr[LEN-1:1]};
      if (ld) begin m_shadow = p; m_pend = 1; end
      m_pos++;
    end
    @(negedge clk_fast) load = 1'b0;
  endtask

  initial begin
    logic [LEN-1:0] clean, p;
    int highs;
    clean = {8{8'b0000_1111}};   // bit 0 leaves first: 1111 then 0000
    #100 rst_n = 1'b0;
    #900;
    @(negedge clk_fast) rst_n = 1'b1;
    check(clk_out == 1'b0 && lap == 1'b0, "reset state");
    // load mid-lap; nothing may change before the lap boundary
    step(1'b1, clean);
    for (int i = 0; i < LEN - 2; i++) begin
      step(1'b0, '0);
      check(clk_out == 1'b0, "pattern held back until the lap ends");
    end
    // now the clean clock: four 500 ps bits high, four low
    highs = 0;
    for (int i = 0; i < 3 * LEN; i++) begin
      step(1'b0, '0);
      highs += clk_out;
    end
    check(highs == 3 * LEN / 2, "50 % duty of the clean pattern");
    // random patterns, loaded at random points of the lap
    for (int n = 0; n < 40; n++) begin
      p = {$urandom, $urandom};
      step(1'b1, p);
      repeat ($urandom_range(LEN + 5, 2)) step(1'b0, '0);
    end
    check(laps > 20, "laps counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd50_000_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
