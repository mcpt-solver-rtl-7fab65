// tb_current_monitor -- checks that a junction switch in an enabled path
// raises wr_int at once, that it is held after the path closes until clr, and
// that changes in a path carrying no current are ignored.
// Clock 200 ps. Expected values come from the monitor's rule as described by
// the paper (current change -> wr_int); hold-until-clr is this design's.
module tb_current_monitor;
  timeunit 1ps; timeprecision 1ps;

  logic clk = 0, rst_n = 0, clr = 0, path_en = 0;
  logic [1:0] mtj = 0;
  logic wr_int;
  int checks = 0, failures = 0;

  current_monitor dut (.*);
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
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      int which = $urandom % 2;
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      check(wr_int == 0, "after clr");
      // idle path: changes are not detected
      mtj[which] = ~mtj[which]; @(negedge clk);
      check(wr_int == 0, "idle path detected");
      path_en = 1; @(negedge clk);
      check(wr_int == 0, "false detection");
      #37; mtj[which] = ~mtj[which]; #1;
      check(wr_int == 1, "switch not seen at once");
      @(negedge clk); path_en = 0; repeat (3) @(negedge clk);
      check(wr_int == 1, "not held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
