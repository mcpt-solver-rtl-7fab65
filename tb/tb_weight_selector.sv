// tb_weight_selector -- programs every synapse of a level-3 selector (the
// paper's selector D) and of a level-0 fixed pair with random codes, then
// checks that each value of the higher bits puts the right pair on vin0/vin1
// and that nothing is driven while en is low.
// Clock 200 ps. Selection by the higher bits and synapse naming {bits, write
// direction} follow the paper; the index encoding is this design's.
module tb_weight_selector;
  timeunit 1ps; timeprecision 1ps;

  logic clk = 0, rst_n = 0;
  logic [2:0] sel = 0;
  logic en = 0, prog_en = 0, prog_pos = 0;
  logic [3:0] prog_idx = 0;
  logic [7:0] vin0, vin1, a_vin0, a_vin1;
  logic a_prog_en = 0;
  int checks = 0, failures = 0;
  int code [16];
  int acode [2];

  weight_selector #(.LEVEL(3)) dut (.clk, .rst_n, .sel, .en, .vin0, .vin1,
    .prog_en, .prog_idx, .prog_pos);
  weight_selector #(.LEVEL(0)) dut_a (.clk, .rst_n, .sel(1'b0), .en, .vin0(a_vin0),
    .vin1(a_vin1), .prog_en(a_prog_en), .prog_idx(prog_idx[0:0]), .prog_pos);
  always #100 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic prog(input int idx, input int c, input bit fixed);
    @(negedge clk); prog_idx = 4'(idx); prog_en = !fixed; a_prog_en = fixed; prog_pos = 0;
    @(negedge clk); prog_pos = 1;
    repeat (c) @(negedge clk);
    prog_en = 0; a_prog_en = 0;
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 16; k++) begin code[k] = 1 + $urandom % 255; prog(k, code[k], 0); end
    for (int k = 0; k < 2; k++)  begin acode[k] = 1 + $urandom % 255; prog(k, acode[k], 1); end
    @(negedge clk);
    for (int s = 0; s < 8; s++) begin
      sel = 3'(s); en = 0; #1;
      check(vin0 == 0 && vin1 == 0, "driven with en low");
      en = 1; #1;
      // S_D<s>0 holds the write-0 strength, S_D<s>1 the write-1 strength.
      check(vin0 == 8'(code[2*s]),   $sformatf("sel %0d vin0 %0d want %0d", s, vin0, code[2*s]));
      check(vin1 == 8'(code[2*s+1]), $sformatf("sel %0d vin1 %0d want %0d", s, vin1, code[2*s+1]));
      check(a_vin0 == 8'(acode[0]) && a_vin1 == 8'(acode[1]), "fixed pair");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
