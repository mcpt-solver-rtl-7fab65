// tb_pcsa -- checks that the sense amplifier latches the MTJ state only after
// its precharge tick, holds it between reads and gives the complement.
// Clock 200 ps; the two-phase read (0.2 ns precharge + 0.2 ns amplify) is
// the paper's.
module tb_pcsa;
  timeunit 1ps; timeprecision 1ps;

  logic clk = 0, rst_n = 0, sen = 0, mtj_state = 0;
  logic rd, rd_b;
  int checks = 0, failures = 0;

  pcsa dut (.*);
  always #100 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit v, old;
    repeat (2) @(negedge clk); rst_n = 1;
    check(rd == 0 && rd_b == 1, "reset");
    for (int t = 0; t < 200; t++) begin
      old = rd;
      v = 1'($urandom);
      mtj_state = v;
      @(negedge clk); sen = 1;
      @(negedge clk);
      check(rd == old, "changed during precharge");
      @(negedge clk); sen = 0;
      check(rd == v && rd_b == !v, $sformatf("read %0d want %0d", rd, v));
      mtj_state = !v;
      repeat (3) @(negedge clk);
      check(rd == v, "not held between reads");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
