// tb_stu_controller -- checks the four-phase strobe pattern (which units are
// read and written, for how long), the 108-tick RN period, the first RN
// 110 ticks after the edge that samples run and the final read of D when run drops.
// Clock 200 ps. The four phases, which units each reads, and the 21.6 ns
// cycle are the paper's; the report instant of each RN is this design's.
module tb_stu_controller;
  timeunit 1ps; timeprecision 1ps;

  logic clk = 0, rst_n = 0, run = 0;
  logic [3:0] rd, wr;
  logic rn_valid, busy;
  int checks = 0, failures = 0;
  int tick = 0, last_rn = -1, n_rn = 0, t_run = 0;
  logic [3:0] prev_rd = 0, prev_wr = 0;
  int seg_len = 0;
  logic [7:0] seg_kind;  // {rd, wr}
  int expect_idx = 0;
  logic [7:0] pattern [8] = '{8'b1001_0000, 8'b0000_0001, 8'b0011_0000, 8'b0000_0010,
                              8'b0110_0000, 8'b0000_0100, 8'b1100_0000, 8'b0000_1000};

  stu_controller dut (.*);
  always #100 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Segment checker: each strobe combination must follow the pattern and last
  // 2 ticks (reads) or 25 ticks (writes).
  always @(negedge clk) begin
    tick++;
    if (rst_n && run && busy && !(rd == 0 && wr == 0)) begin
      if ({rd, wr} != {prev_rd, prev_wr}) begin
        check({rd, wr} == pattern[expect_idx % 8],
              $sformatf("segment %0d: rd=%b wr=%b", expect_idx, rd, wr));
        if (expect_idx > 0)
          check(seg_len == ((expect_idx % 2) == 1 ? 2 : 25),
                $sformatf("segment %0d length %0d", expect_idx - 1, seg_len));
        expect_idx++;
        seg_len = 1;
      end else seg_len++;
    end
    prev_rd = rd; prev_wr = wr;
    if (rn_valid) begin
      if (n_rn == 0) check(tick - t_run == 112, $sformatf("first RN after %0d ticks", tick - t_run));
      else if (run)  check(tick - last_rn == 108, $sformatf("RN period %0d", tick - last_rn));
      last_rn = tick; n_rn++;
    end
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); run = 1; t_run = tick;
    wait (n_rn == 10);
    @(negedge clk); run = 0;
    // the RN in progress completes, then one read of D, then idle
    wait (!busy);
    repeat (3) @(negedge clk);
    check(n_rn == 11, $sformatf("RNs after stop %0d", n_rn));
    check(rd == 0 && wr == 0 && !rn_valid, "not idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
