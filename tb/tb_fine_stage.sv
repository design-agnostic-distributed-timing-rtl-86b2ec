// tb_fine_stage: checks the fine-stage model: delay 295 + 10*code ps for all
// sixteen codes, and that a 100 ps pulse passes unchanged in width.
`timescale 1ps/1ps
module tb_fine_stage;
  logic a = 1'b0, y;
  logic [3:0] code = '0;
  int checks = 0, failures = 0;
  longint tr, tf;

  fine_stage dut (.a(a), .code(code), .y(y));
  always @(posedge y) tr = $time;
  always @(negedge y) tf = $time;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    longint t0;
    #1000;
    for (int k = 0; k < 16; k++) begin
      code = 4'(k);
      #100;
      t0 = $time; a = 1'b1;
      #100 a = 1'b0;
      #1000;
      check(tr - t0 == 295 + 10 * k, $sformatf("delay code=%0d", k));
      check(tf - tr == 100, $sformatf("pulse width code=%0d", k));
    end
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
