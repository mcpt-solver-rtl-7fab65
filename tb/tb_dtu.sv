// tb_dtu -- the diffusion tracking unit (neurons, FTJ synapses, current
// monitors, controller, visit counters) at N = 8 nodes.
// All synapses are programmed to code 128 (p = 0.5 per junction), which
// gives P(stay) = 0.25 and P(left) = P(right) = 0.375 at interior nodes and
// P(right) = 0.5 at the reflecting node 0. The bench follows the walker from
// the move flags, keeps its own visit tally and checks:
//   * exactly one active neuron after every step (winner-takes-all plus
//     self-inhibition) at the position the bench expects,
//   * the step period of 50 ticks (10 ns),
//   * stay/left/right frequencies, reflection at node 0,
//   * walkers_done, steps and every visit counter against the tally.
// Clock 200 ps; the 10 ns step is the paper's, N = 8 and the code 128 are
// this bench's choices to keep the run short.
module tb_dtu;
  timeunit 1ps; timeprecision 1ps;
  import npde_pkg::*;

  localparam int N = 8;
  localparam int AW = $clog2(N);
  localparam int W = 120;
  localparam int START = 3;
  logic clk = 0, rst_n = 0;
  logic syn_prog_en = 0, syn_prog_pos = 0, start = 0, cnt_clr = 0;
  logic [AW-1:0] syn_prog_sel = 0, start_pos = 0, cnt_rd_i = 0, cnt_rd_j = 0;
  logic [31:0] num_walkers = 0, walkers_done, steps;
  logic busy, done, cnt_clearing;
  logic [31:0] cnt_rd_data;
  logic [N-1:0] mtj_vec, moved_left, moved_right;
  int checks = 0, failures = 0;
  int tally [N];
  int cur = START, pend = 0;
  int n_left = 0, n_right = 0, n_stay = 0, n0_visits = 0, n0_right = 0;
  longint t_prev = -1;
  logic [31:0] steps_q = 0, wd_q = 0;

  dtu #(.N(N), .CW(32)) dut (.*);
  always #100 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  task automatic prog_syn(input int sel, input int code);
    @(negedge clk); syn_prog_sel = AW'(sel); syn_prog_en = 1; syn_prog_pos = 0;
    @(negedge clk); syn_prog_pos = 1;
    repeat (code) @(negedge clk);
    syn_prog_en = 0;
  endtask

  // Walker tracking.
  always @(posedge clk) if (rst_n && busy) begin
    if (|moved_left)  pend = -1;
    if (|moved_right) pend = +1;
    if (steps != steps_q) begin
      // a step finished: the node read in it is cur
      if (t_prev >= 0) check($time - t_prev == 50 * 200, $sformatf("step period %0t", $time - t_prev));
      t_prev = $time;
      tally[cur]++;
      if (cur == 0) begin n0_visits++; if (pend == 1) n0_right++; check(pend != -1, "left move from node 0"); end
      else if (pend == -1) n_left++;
      else if (pend == 1) n_right++;
      else n_stay++;
      cur += pend; pend = 0;
      // after the reset phase exactly one neuron holds the walker
      check(mtj_vec == N'(1) << cur, $sformatf("mtj_vec %b walker at %0d", mtj_vec, cur));
    end
    if (walkers_done != wd_q) begin
      check(cur == N - 1, $sformatf("absorbed walker was at %0d", cur));
      cur = START; t_prev = -1;
    end
    steps_q = steps; wd_q = walkers_done;
  end

  initial begin : watchdog
    repeat (5000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ps, pl, pr, p0;
    int rowsum;
    foreach (tally[k]) tally[k] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < N; k++) prog_syn(k, 128);
    check(dut.g_syn[3].u_syn.weight == 8'd128, "synapse weight programmed");
    @(negedge clk); cnt_clr = 1; @(negedge clk); cnt_clr = 0;
    wait (!cnt_clearing);
    @(negedge clk); start_pos = AW'(START); num_walkers = W; start = 1;
    @(negedge clk); start = 0;
    wait (done); @(negedge clk);
    ps = real'(n_stay) / real'(n_stay + n_left + n_right);
    pl = real'(n_left) / real'(n_stay + n_left + n_right);
    pr = real'(n_right) / real'(n_stay + n_left + n_right);
    p0 = real'(n0_right) / real'(n0_visits);
    $display("walkers %0d steps %0d  stay %f left %f right %f  node0 move %f (%0d visits)",
             walkers_done, steps, ps, pl, pr, p0, n0_visits);
    check(walkers_done == W, "walkers_done");
    check(ps > 0.21 && ps < 0.29, "P(stay) = 0.25");
    check(pl > 0.33 && pl < 0.42, "P(left) = 0.375");
    check(pr > 0.33 && pr < 0.42, "P(right) = 0.375");
    check(p0 > 0.38 && p0 < 0.62, "P(move) at node 0 = 0.5");
    rowsum = 0;
    for (int j = 0; j < N; j++) begin
      @(negedge clk); cnt_rd_i = AW'(START); cnt_rd_j = AW'(j);
      @(negedge clk);
      check(cnt_rd_data == 32'(tally[j]), $sformatf("n[%0d][%0d]=%0d tally %0d", START, j, cnt_rd_data, tally[j]));
      rowsum += int'(cnt_rd_data);
    end
    check(rowsum == int'(steps), "counts sum to steps");
    check(tally[N-1] == 0, "absorbing node never counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
