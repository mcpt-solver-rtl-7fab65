// tb_ftj_synapse -- checks programming (reset, one LSB per positive tick,
// saturation) and the operational output gating of the FTJ synapse.
// Clock 200 ps. Programming by reset plus positive pulses follows the
// paper's synapse waveforms; one 8-bit step per tick is this design's.
module tb_ftj_synapse;
  timeunit 1ps; timeprecision 1ps;

  logic clk = 0, rst_n = 0, prog_en = 0, prog_pos = 0, vin = 0;
  logic [7:0] vout, weight;
  int checks = 0, failures = 0;

  ftj_synapse #(.WW(8)) dut (.*);
  always #100 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic prog_code(input int code);
    @(negedge clk); prog_en = 1; prog_pos = 0;
    @(negedge clk); prog_pos = 1;
    repeat (code) @(negedge clk);
    prog_en = 0;
    @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    check(weight == 0 && vout == 0, "reset");
    for (int t = 0; t < 40; t++) begin
      int c = $urandom % 256;
      prog_code(c);
      check(weight == 8'(c), $sformatf("weight %0d want %0d", weight, c));
      vin = 0; #1; check(vout == 0, "vout with vin low");
      vin = 1; #1; check(vout == 8'(c), $sformatf("vout %0d want %0d", vout, c));
      prog_en = 1; prog_pos = 1; #1; check(vout == 0, "vout while programming");
      prog_en = 0; vin = 0; #1;
    end
    prog_code(300);
    check(weight == 8'd255, "saturation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
