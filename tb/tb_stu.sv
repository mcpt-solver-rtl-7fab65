// tb_stu -- scattering-direction sampling, the workload the paper runs on the
// scattering unit: a discrete Gaussian over the 16 directions (variance 4,
// centred on direction 8) is split into the tree's conditional probabilities
// P(A1), P(B1|A), P(C1|AB), P(D1|ABC), quantised to 8-bit codes and programmed
// into the 30 synapses as pairs (256-c, c). NS samples are drawn and their
// histogram is compared bin by bin with the distribution the codes define.
// The RN period of 108 ticks (21.6 ns) is checked on every sample.
// Clock 200 ps. The Gaussian of variance 4 over 16 directions is the paper's
// workload; the sample count and tolerances are this bench's.
module tb_stu;
  timeunit 1ps; timeprecision 1ps;

  localparam int NS = 20000;

  logic clk = 0, rst_n = 0, run = 0;
  logic [3:0] rn;
  logic rn_valid, busy;
  logic prog_en = 0, prog_pos = 0;
  logic [1:0] prog_level = 0;
  logic [3:0] prog_idx = 0;
  int checks = 0, failures = 0;

  real pdf [16];
  real want [16];
  int  hist [16];
  int  tick = 0, last = -1, n = 0, bad_period = 0;

  stu dut (.*);
  always #100 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic prog(input int level, input int idx, input int c);
    @(negedge clk); prog_level = 2'(level); prog_idx = 4'(idx); prog_en = 1; prog_pos = 0;
    @(negedge clk); prog_pos = 1;
    repeat (c) @(negedge clk);
    prog_en = 0;
  endtask

  // Sum of pdf over the leaves below a tree node (level bits given by prefix).
  function automatic real mass(int level, int prefix);
    real m = 0;
    for (int v = 0; v < 16; v++) if ((v >> (4 - level)) == prefix) m += pdf[v];
    return m;
  endfunction

  initial begin : watchdog
    repeat (NS * 108 + 100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    tick++;
    if (rst_n && rn_valid) begin
      if (last >= 0 && tick - last != 108) bad_period++;
      last = tick;
      hist[rn]++;
      n++;
    end
  end

  initial begin
    real tot, p, worst;
    int  c;
    int  code [4][8];
    tot = 0;
    for (int v = 0; v < 16; v++) begin pdf[v] = $exp(-real'((v - 8) * (v - 8)) / 8.0); tot += pdf[v]; end
    for (int v = 0; v < 16; v++) begin pdf[v] = pdf[v] / tot; hist[v] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // program level k, node prefix q: conditional probability of a 1
    for (int k = 0; k < 4; k++) begin
      for (int q = 0; q < (1 << k); q++) begin
        automatic real m = mass(k, q);
        p = (m > 0) ? mass(k + 1, 2 * q + 1) / m : 0.0;
        c = int'(p * 256.0);
        if (c > 255) c = 255;
        code[k][q] = c;
        prog(k, 2 * q,     (256 - c > 255) ? 255 : 256 - c);
        prog(k, 2 * q + 1, c);
      end
    end
    // distribution defined by the programmed codes
    for (int v = 0; v < 16; v++) begin
      want[v] = 1.0;
      for (int k = 0; k < 4; k++) begin
        automatic int q = v >> (4 - k);
        automatic int b = (v >> (3 - k)) & 1;
        want[v] *= b ? real'(code[k][q]) / 256.0 : 1.0 - real'(code[k][q]) / 256.0;
      end
    end
    @(negedge clk); run = 1;
    wait (n == NS);
    run = 0;
    wait (!busy);
    repeat (4) @(negedge clk);
    check(bad_period == 0, $sformatf("%0d RN periods differ from 108 ticks", bad_period));
    worst = 0;
    for (int v = 0; v < 16; v++) begin
      automatic real f = real'(hist[v]) / real'(n);
      automatic real tol = 4.5 * $sqrt(want[v] * (1.0 - want[v]) / real'(n)) + 0.002;
      $display("bin %2d: sampled %6.4f  programmed %6.4f  gaussian %6.4f", v, f, want[v], pdf[v]);
      check((f > want[v] - tol) && (f < want[v] + tol), $sformatf("bin %0d off", v));
      if (f - pdf[v] > worst) worst = f - pdf[v];
      if (pdf[v] - f > worst) worst = pdf[v] - f;
    end
    check(worst < 0.02, $sformatf("max deviation from the Gaussian %f", worst));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
