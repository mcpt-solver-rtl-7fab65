// tb_neuropde_top -- end-to-end bench of the whole chip at its full size
// (50 diffusion nodes, 32-bit visit counters, 4-bit sampling tree); no
// parameter is overridden.
// The host programs all 50 FTJ synapses (code 128) and all 30 STU weight
// pairs (uniform), then runs the sampling unit while the diffusion unit
// walks: four walkers from node 45 and one from node 0 (reflecting end).
// The bench follows the walkers, reads back the visit counters and counts
// every mechanism of the design; a mechanism that never happened fails:
// left, right and stay moves, reflection at node 0, absorption at node 49,
// self-inhibition resets, clearing and re-initialisation between walkers,
// visit-counter increments, random numbers from the sampling unit, and the
// flush of the sampling unit when it is stopped. Timing is checked too:
// 50 ticks per walk step and 108 ticks between random numbers.
// Clock 200 ps; the 10 ns step and 21.6 ns sampling cycle are the paper's
// figures, the walker start nodes and codes are this bench's.
module tb_neuropde_top;
  timeunit 1ps; timeprecision 1ps;
  import npde_pkg::*;

  localparam int N = 50;
  localparam int AW = $clog2(N);
  logic clk = 0, rst_n = 0;
  logic dtu_syn_prog_en = 0, dtu_syn_prog_pos = 0, dtu_start = 0, dtu_cnt_clr = 0;
  logic [AW-1:0] dtu_syn_prog_sel = 0, dtu_start_pos = 0, dtu_cnt_rd_i = 0, dtu_cnt_rd_j = 0;
  logic [31:0] dtu_num_walkers = 0, dtu_walkers_done, dtu_steps, dtu_cnt_rd_data;
  logic dtu_busy, dtu_done, dtu_cnt_clearing;
  logic [N-1:0] dtu_mtj_vec, dtu_moved_left, dtu_moved_right;
  logic stu_prog_en = 0, stu_prog_pos = 0, stu_run = 0;
  logic [1:0] stu_prog_level = 0;
  logic [3:0] stu_prog_idx = 0;
  logic [3:0] stu_rn;
  logic stu_rn_valid, stu_busy;
  int checks = 0, failures = 0;

  neuropde_top dut (.*);
  always #100 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_left = 0, n_right = 0, n_stay = 0, n_reflect = 0, n_absorb = 0;
  int n_inhibit = 0, n_clear = 0, n_init = 0, n_inc = 0, n_rn = 0, n_flush = 0;
  int rn_hist [16];
  int start_node = 45, cur = 45, pend = 0;
  longint t_step = -1, t_rn = -1;
  logic [31:0] steps_q = 0, wd_q = 0;
  logic rst_q = 0, flush_q = 0;

  always @(posedge clk) if (rst_n) begin
    // walker tracking (same scheme as the unit bench)
    if (dtu_busy) begin
      if (|dtu_moved_left)  pend = -1;
      if (|dtu_moved_right) pend = +1;
      if (dtu_steps != steps_q && dtu_steps != 0) begin
        if (t_step >= 0) check($time - t_step == 50 * 200, "walk step period");
        t_step = $time;
        if (pend == -1) n_left++;
        else if (pend == 1) begin n_right++; if (cur == 0) n_reflect++; end
        else n_stay++;
        check(!(cur == 0 && pend == -1), "left move at node 0");
        cur += pend; pend = 0;
        check(dtu_mtj_vec == N'(1) << cur, $sformatf("one walker at %0d", cur));
      end
      if (dtu_walkers_done != wd_q && dtu_walkers_done != 0) begin
        n_absorb++;
        check(cur == N - 1, "absorbed at the last node");
        cur = start_node; t_step = -1;
      end
    end
    steps_q = dtu_steps; wd_q = dtu_walkers_done;
    // self-inhibition: a neuron reset by its monitor in the reset phase
    if (dut.u_dtu.rst_phase && |dut.u_dtu.reset_vec && !rst_q) n_inhibit++;
    rst_q = dut.u_dtu.rst_phase && |dut.u_dtu.reset_vec;
    if (dut.u_dtu.clear_all) n_clear++;
    if (dut.u_dtu.init_en) n_init++;
    if (dut.u_dtu.u_ctrl.cnt_inc) n_inc++;
    // sampling unit
    if (stu_rn_valid) begin
      n_rn++; rn_hist[stu_rn]++;
      if (t_rn >= 0) check($time - t_rn == 108 * 200, "random-number period");
      t_rn = $time;
    end
    if (dut.u_stu.u_ctrl.state == STU_FLUSH && !flush_q) n_flush++;
    flush_q = (dut.u_stu.u_ctrl.state == STU_FLUSH);
  end

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic prog_dtu(input int sel, input int code);
    @(negedge clk); dtu_syn_prog_sel = AW'(sel); dtu_syn_prog_en = 1; dtu_syn_prog_pos = 0;
    @(negedge clk); dtu_syn_prog_pos = 1;
    repeat (code) @(negedge clk);
    dtu_syn_prog_en = 0;
  endtask
  task automatic prog_stu(input int level, input int idx, input int code);
    @(negedge clk); stu_prog_level = 2'(level); stu_prog_idx = 4'(idx); stu_prog_en = 1; stu_prog_pos = 0;
    @(negedge clk); stu_prog_pos = 1;
    repeat (code) @(negedge clk);
    stu_prog_en = 0;
  endtask

  task automatic run_walkers(input int from, input int w);
    int rowsum, steps_run;
    start_node = from; cur = from; t_step = -1;
    @(negedge clk); dtu_start_pos = AW'(from); dtu_num_walkers = w; dtu_start = 1;
    @(negedge clk); dtu_start = 0;
    wait (dtu_done); @(negedge clk);
    steps_run = int'(dtu_steps);
    check(dtu_walkers_done == 32'(w), "all walkers absorbed");
    rowsum = 0;
    for (int j = 0; j < N; j++) begin
      @(negedge clk); dtu_cnt_rd_i = AW'(from); dtu_cnt_rd_j = AW'(j);
      @(negedge clk); rowsum += int'(dtu_cnt_rd_data);
      if (j == N - 1) check(dtu_cnt_rd_data == 0, "absorbing node not counted");
      if (j == from) check(dtu_cnt_rd_data >= 32'(w), "start node counted once per walker");
    end
    check(rowsum == steps_run, $sformatf("row %0d sums to %0d steps (got %0d)", from, steps_run, rowsum));
    $display("start %0d: %0d walkers, %0d steps", from, w, steps_run);
  endtask

  initial begin
    int seen;
    foreach (rn_hist[v]) rn_hist[v] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < N; k++) prog_dtu(k, 128);
    for (int l = 0; l < 4; l++) for (int i = 0; i < (2 << l); i++) prog_stu(l, i, 128);
    @(negedge clk); dtu_cnt_clr = 1; @(negedge clk); dtu_cnt_clr = 0;
    wait (!dtu_cnt_clearing);
    @(negedge clk); stu_run = 1;
    run_walkers(45, 4);
    run_walkers(0, 1);
    @(negedge clk); stu_run = 0;
    wait (!stu_busy); repeat (3) @(negedge clk);
    seen = 0;
    foreach (rn_hist[v]) if (rn_hist[v] > 0) seen++;
    $display("left %0d right %0d stay %0d reflect %0d absorb %0d inhibit %0d clear %0d init %0d inc %0d rn %0d flush %0d values %0d",
             n_left, n_right, n_stay, n_reflect, n_absorb, n_inhibit, n_clear, n_init, n_inc, n_rn, n_flush, seen);
    check(n_left > 0, "mechanism: left move");
    check(n_right > 0, "mechanism: right move");
    check(n_stay > 0, "mechanism: stay");
    check(n_reflect > 0, "mechanism: reflection at node 0");
    check(n_absorb == 5, "mechanism: absorption");
    check(n_inhibit == n_left + n_right, "mechanism: self-inhibition once per move");
    check(n_clear == 5 && n_init == 5, "mechanism: clear and init per walker");
    check(n_inc == n_left + n_right + n_stay, "mechanism: visit count per step");
    check(n_rn > 100, "mechanism: random numbers");
    check(n_flush == 1, "mechanism: flush");
    check(seen == 16, "all 16 sample values produced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
