// tb_heat_equation -- solves the 1-D steady-state heat equation
//     u'' = F (L - x) on [0, L],  u(0) = 0,  u'(0) = 0
// with the diffusion tracking unit, the way a host would use it, and
// compares the result with the exact answer u(x) = F L x^2 / 2 - F x^3 / 6.
//
// Grid: N = 10 nodes X_j = j L / (N-1), L = 2, F = 3. The walk uses
// P_s = 0.5, i.e. P_g = 0.25 = dt / dx^2 (diffusion coefficient sigma^2 = 2),
// so per-junction code 75 (p = 1 - sqrt(0.5)) at interior nodes and code
// 128 (2 P_g) at the reflecting node 0. For every start node i, W walkers
// are run until they are absorbed at x = L; the host estimate is
//     u_i = -(F dt / W) sum_j n[i][j] (L - X_j),   u(X_i) ~ u_i - u_0.
// Checks:
//   * u_i from the hardware counters equals the bench's own per-walker tally;
//   * each u_i lies within 5 standard errors of the expectation of the exact
//     Markov chain defined by the programmed codes (solved here by Gaussian
//     elimination, independent of the hardware);
//   * u(X_i) lies within 5 standard errors (plus the 0.05 discretisation
//     bias of this grid) of the analytic solution.
// The equation, the estimator and the P_g/dt relation follow the paper's
// heat-equation study (there N = 50 and W = 1e4); N = 10 and W = 400 are
// this bench's choices to keep the run to seconds. Clock 200 ps, 10 ns/step.
module tb_heat_equation;
  timeunit 1ps; timeprecision 1ps;
  import npde_pkg::*;

  localparam int N = 10;
  localparam int AW = $clog2(N);
  localparam int W = 400;
  localparam real L = 2.0, F = 3.0;
  localparam int CODE = 75, CODE0 = 128;
  logic clk = 0, rst_n = 0;
  logic syn_prog_en = 0, syn_prog_pos = 0, start = 0, cnt_clr = 0;
  logic [AW-1:0] syn_prog_sel = 0, start_pos = 0, cnt_rd_i = 0, cnt_rd_j = 0;
  logic [31:0] num_walkers = 0, walkers_done, steps;
  logic busy, done, cnt_clearing;
  logic [31:0] cnt_rd_data;
  logic [N-1:0] mtj_vec, moved_left, moved_right;
  int checks = 0, failures = 0;

  real dx, dt;
  int cur = 0, pend = 0, start_node = 0;
  real score = 0.0, sum_s = 0.0, sum_s2 = 0.0;
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

  // Per-walker score sum over steps of (L - X_pos), from the move flags.
  always @(posedge clk) if (rst_n && busy) begin
    if (|moved_left)  pend = -1;
    if (|moved_right) pend = +1;
    if (steps != steps_q && steps != 0) begin   // a restart to 0 is no step
      score += L - real'(cur) * dx;
      cur += pend; pend = 0;
    end
    if (walkers_done != wd_q && walkers_done != 0) begin
      sum_s += score; sum_s2 += score * score;
      score = 0.0; cur = start_node;
    end
    steps_q = steps; wd_q = walkers_done;
  end

  initial begin : watchdog
    repeat (60000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real p, ps, pg, p0;
    real a [N-1][N];          // augmented system (I - Q) y = (L - X)
    real y [N-1];
    real u_hw [N-1], se [N-1], u_chain [N-1];
    real x, an, sq, tol;
    dx = L / real'(N - 1);
    p = real'(CODE) / 256.0; ps = (1.0 - p) * (1.0 - p); pg = (1.0 - ps) / 2.0;
    p0 = real'(CODE0) / 256.0;
    dt = pg * dx * dx;
    // exact chain expectation
    for (int r = 0; r < N - 1; r++) begin
      for (int c = 0; c < N; c++) a[r][c] = 0.0;
      a[r][r] = 1.0;
      a[r][N-1] = L - real'(r) * dx;
      if (r == 0) begin a[0][0] -= 1.0 - p0; a[0][1] -= p0; end
      else begin
        a[r][r] -= ps; a[r][r-1] -= pg;
        if (r + 1 < N - 1) a[r][r+1] -= pg;
      end
    end
    for (int k = 0; k < N - 1; k++)
      for (int r = k + 1; r < N - 1; r++) begin
        automatic real f = a[r][k] / a[k][k];
        for (int c = k; c < N; c++) a[r][c] -= f * a[k][c];
      end
    for (int r = N - 2; r >= 0; r--) begin
      automatic real acc = a[r][N-1];
      for (int c = r + 1; c < N - 1; c++) acc -= a[r][c] * y[c];
      y[r] = acc / a[r][r];
      u_chain[r] = -F * dt * y[r];
    end

    repeat (2) @(negedge clk); rst_n = 1;
    prog_syn(0, CODE0);
    for (int k = 1; k < N; k++) prog_syn(k, CODE);
    @(negedge clk); cnt_clr = 1; @(negedge clk); cnt_clr = 0;
    wait (!cnt_clearing);

    for (int i = 0; i < N - 1; i++) begin
      automatic real acc = 0.0, m, v;
      start_node = i; cur = i; score = 0.0; sum_s = 0.0; sum_s2 = 0.0;
      @(negedge clk); start_pos = AW'(i); num_walkers = W; start = 1;
      @(negedge clk); start = 0;
      wait (done); @(negedge clk);
      check(walkers_done == W, "walkers_done");
      for (int j = 0; j < N; j++) begin
        @(negedge clk); cnt_rd_i = AW'(i); cnt_rd_j = AW'(j);
        @(negedge clk); acc += real'(cnt_rd_data) * (L - real'(j) * dx);
      end
      u_hw[i] = -F * dt / real'(W) * acc;
      m = sum_s / real'(W);
      v = (sum_s2 / real'(W) - m * m) * real'(W) / real'(W - 1);
      se[i] = F * dt * $sqrt(v / real'(W));
      check(u_hw[i] + F * dt * m < 1e-9 && u_hw[i] + F * dt * m > -1e-9,
            $sformatf("counter estimate %f differs from tally %f", u_hw[i], -F * dt * m));
      $display("start node %0d: u_i %8.4f  chain %8.4f  (%5.2f standard errors)", i, u_hw[i], u_chain[i],
               (u_hw[i] - u_chain[i]) / se[i]);
      check(u_hw[i] - u_chain[i] < 5.0 * se[i] && u_chain[i] - u_hw[i] < 5.0 * se[i],
            $sformatf("u_%0d = %f, chain expects %f (se %f)", i, u_hw[i], u_chain[i], se[i]));
    end
    sq = 0.0;
    $display("   x      u(x) hw    chain    exact");
    for (int i = 0; i < N - 1; i++) begin
      x = real'(i) * dx;
      an = F * L * x * x / 2.0 - F * x * x * x / 6.0;
      tol = 5.0 * $sqrt(se[i] * se[i] + se[0] * se[0]) + 0.05;
      $display("%6.3f  %8.4f  %8.4f  %8.4f", x, u_hw[i] - u_hw[0], u_chain[i] - u_chain[0], an);
      check((u_hw[i] - u_hw[0]) - an < tol && an - (u_hw[i] - u_hw[0]) < tol,
            $sformatf("u(%f) = %f, exact %f", x, u_hw[i] - u_hw[0], an));
      sq += ((u_hw[i] - u_hw[0]) - an) ** 2;
    end
    $display("mean squared error against the exact solution: %f", sq / real'(N - 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
