// tb_stu_bit_unit -- runs read/write cycles of one bit unit. With the pair
// (vin0, vin1) = (256-c, c) the bit must be 1 with probability c/256
// whatever it was before; with (0, 255) it must go to 1 and stay there.
// Clock 200 ps; 2-tick read and 25-tick write as in the paper. The (1-p, p)
// programming is this design's rule.
module tb_stu_bit_unit;
  timeunit 1ps; timeprecision 1ps;

  logic clk = 0, rst_n = 0, rd = 0, wr = 0;
  logic [7:0] vin0 = 0, vin1 = 0;
  logic out, out_b, mtj_state;
  int checks = 0, failures = 0;

  stu_bit_unit #(.T_WR_PS(5000)) dut (.*);
  always #100 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic cycle();
    @(negedge clk); rd = 1; repeat (2) @(negedge clk); rd = 0;
    wr = 1; repeat (25) @(negedge clk); wr = 0;
    rd = 1; repeat (2) @(negedge clk); rd = 0;
  endtask

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones, c;
    repeat (2) @(negedge clk); rst_n = 1;
    vin0 = 0; vin1 = 255;
    repeat (4) cycle();
    check(out == 1 && mtj_state == 1, "did not settle at 1");
    repeat (10) begin cycle(); check(out == 1, "left 1 with zero write-0 strength"); end
    for (int t = 0; t < 3; t++) begin
      c = (t == 0) ? 40 : (t == 1) ? 128 : 200;
      vin1 = 8'(c); vin0 = 8'(256 - c);
      ones = 0;
      repeat (1500) begin cycle(); ones += out; check(out == mtj_state, "readout"); end
      check((real'(ones) / 1500.0 > real'(c) / 256.0 - 0.05) &&
            (real'(ones) / 1500.0 < real'(c) / 256.0 + 0.05),
            $sformatf("code %0d: %0d ones of 1500", c, ones));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
