// tb_dtu_visit_mem -- random increments against a reference matrix, host
// reads of every word, and the clearing sweep.
// Clock 200 ps, reads have one tick of latency. The counting rule is the
// paper's; the memory organisation and N = 7 are this bench's choices.
module tb_dtu_visit_mem;
  timeunit 1ps; timeprecision 1ps;

  localparam int N = 7;
  logic clk = 0, rst_n = 0, clr = 0, inc = 0;
  logic clearing;
  logic [2:0] inc_i = 0, inc_j = 0, rd_i = 0, rd_j = 0;
  logic [15:0] rd_data;
  int ref_cnt [N][N];
  int checks = 0, failures = 0;

  dtu_visit_mem #(.N(N), .CW(16)) dut (.*);
  always #100 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic read_all();
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      @(negedge clk); rd_i = 3'(i); rd_j = 3'(j);
      @(negedge clk);
      check(rd_data == 16'(ref_cnt[i][j]), $sformatf("n[%0d][%0d]=%0d want %0d", i, j, rd_data, ref_cnt[i][j]));
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    wait (!clearing); @(negedge clk);
    check(N * N + 1 > 0, "cleared");
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) ref_cnt[i][j] = 0;
    read_all();
    repeat (3000) begin
      @(negedge clk);
      inc = 1'($urandom); inc_i = 3'($urandom % N); inc_j = 3'($urandom % N);
      if (inc) ref_cnt[inc_i][inc_j]++;
    end
    @(negedge clk); inc = 0;
    read_all();
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    check(clearing, "clearing flag");
    wait (!clearing); @(negedge clk);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) ref_cnt[i][j] = 0;
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
