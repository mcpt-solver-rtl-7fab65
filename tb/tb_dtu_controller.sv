// tb_dtu_controller -- the diffusion controller driven by a behavioural
// walker (a position register that moves -1/0/+1 at the end of every
// activation phase and is reflected at node 0) instead of neurons.
// Checks: phase order and lengths (read 2, transmit 1, activate 25, reset 22,
// 50 ticks per step), start latency, counter increments at the walker's
// position, absorption at N-1, walker count, step count, done pulse.
// Clock 200 ps. The four phases and the 10 ns step follow the paper; the
// phase split and the behavioural walker are this design's.
module tb_dtu_controller;
  timeunit 1ps; timeprecision 1ps;
  import npde_pkg::*;

  localparam int N = 8;
  localparam int AW = $clog2(N);
  logic clk = 0, rst_n = 0, start = 0;
  logic [AW-1:0] start_pos = 0;
  logic [31:0] num_walkers = 0;
  logic [N-1:0] rd_vec;
  logic sen, syn_en, en_wr, rst_phase, clear_all, init_en, mon_clr, cnt_inc, busy, done;
  logic [AW-1:0] init_pos, cnt_i, cnt_j;
  logic [31:0] walkers_done, steps;
  int checks = 0, failures = 0;
  int wpos = -1;
  int n_inc = 0, n_abs = 0, n_clear = 0;
  longint t_sen_prev = -1;
  int sen_run = 0, tx_run = 0, act_run = 0, rst_run = 0;

  dtu_controller #(.N(N)) dut (.*);
  always #100 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // Behavioural walker + PCSA: rd_vec shows the walker once the read is done.
  always_ff @(posedge clk) begin
    if (!rst_n) wpos <= -1;
    else if (clear_all) wpos <= -1;
    else if (init_en) wpos <= int'(init_pos);
    else if (en_wr && act_run == DTU_T_ACT - 1) begin
      automatic int r = $urandom % 3;
      automatic int np = wpos + r - 1;
      if (np < 0) np = 1;          // reflect
      wpos <= np;
    end
  end
  always_comb begin
    rd_vec = '0;
    if (wpos >= 0) rd_vec[wpos] = 1'b1;
  end

  // Phase-length monitor.
  always @(negedge clk) if (rst_n) begin
    if (sen) sen_run++;
    else begin if (sen_run != 0) check(sen_run == DTU_T_RD, "read length"); sen_run = 0; end
    if (en_wr) act_run++;
    else begin if (act_run != 0) check(act_run == DTU_T_ACT, "activate length"); act_run = 0; end
    if (rst_phase) rst_run++;
    else begin if (rst_run != 0) check(rst_run == DTU_T_RST, "reset length"); rst_run = 0; end
    if (syn_en && !en_wr) tx_run++;
    else begin if (tx_run != 0) check(tx_run == DTU_T_TX, "transmit length"); tx_run = 0; end
    check(!(sen && en_wr) && !(en_wr && rst_phase), "phases overlap");
    if (clear_all) n_clear++;
  end

  // Step period: rising edges of sen within one walker are 50 ticks apart.
  always @(posedge clk) if (rst_n) begin
    if (sen && sen_run == 0) begin
      if (t_sen_prev >= 0 && wpos >= 0 && ($time - t_sen_prev) < 60 * 200)
        check(($time - t_sen_prev) == 50 * 200, $sformatf("step period %0t", $time - t_sen_prev));
      t_sen_prev = $time;
    end
    if (cnt_inc) begin
      n_inc++;
      check(cnt_i == start_pos, "cnt_i");
    end
  end
  // cnt_j must name the node read in this step.
  always @(posedge clk) if (rst_n && syn_en && !en_wr && rd_vec != 0) begin
    if (wpos == N - 1) n_abs++;
  end

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(!busy && !sen && !en_wr, "idle outputs");
    // start with num_walkers = 0 -> done immediately
    start = 1; @(negedge clk); start = 0;
    lat = 0; while (!done) begin @(negedge clk); lat++; end
    check(lat == 1, $sformatf("zero-walker done latency %0d", lat));
    // real run
    start_pos = 3'd4; num_walkers = 40;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    check(clear_all, "clear right after start");
    @(negedge clk); check(init_en && init_pos == 4, "init after clear");
    @(negedge clk); check(sen, "first read after init");
    wait (done); @(negedge clk);
    $display("walkers %0d steps %0d incs %0d clears %0d", walkers_done, steps, n_inc, n_clear);
    check(walkers_done == 40, "walkers_done");
    check(n_inc == steps, "increments equal steps");
    check(n_clear == 40, "one clear per walker");
    check(n_abs == 40, "one absorption seen per walker");
    check(!busy, "idle after done");
    check(steps > 40, "walk length plausible");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cnt_j check: the increment one tick after transmit starts carries the
  // position the walker had at the read.
  always @(negedge clk) if (rst_n && cnt_inc) check(int'(cnt_j) == wpos, $sformatf("cnt_j %0d walker %0d", cnt_j, wpos));
endmodule
