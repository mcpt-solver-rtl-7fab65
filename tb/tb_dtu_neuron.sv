// tb_dtu_neuron -- two neurons wired as N_i and N_{i+2} of one series write
// path (out_i -> in_{i+2}, the monitor of N_{i+2} feeding wr_int_i back).
// Each activation window must switch at most one of the two junctions
// (winner-takes-all), switch one with probability 1-(1-p)^2, pick either side
// about equally often, raise wr_int when it happens, and the PCSA must read
// the states back. reset and init must write 0 and 1.
// Clock 200 ps; 25-tick (5 ns) activation windows as in the paper. The
// expected move probability 1-(1-p)^2 follows from two junctions racing.
module tb_dtu_neuron;
  timeunit 1ps; timeprecision 1ps;

  logic clk = 0, rst_n = 0, sen = 0, en_wr = 0, mon_clr = 0;
  logic [7:0] lvl = 0;
  logic reset_a = 0, reset_b = 0, init_a = 0;
  logic rd_a, rd_b, out_en_a, out_en_b, wr_int_a, wr_int_ll_a, wr_int_ll_b;
  logic [7:0] out_lvl_a, out_lvl_b;
  logic mtj_a, mtj_b;
  int checks = 0, failures = 0;

  dtu_neuron #(.SLOT(0)) na (.clk, .rst_n, .sen, .rd(rd_a), .wr(lvl), .en_wr, .wr_int(wr_int_a),
    .out_en(out_en_a), .out_lvl(out_lvl_a), .in_en(1'b0), .in_lvl(8'd0), .en_wr_ll(1'b0),
    .mtj_ll(1'b0), .wr_int_ll(wr_int_ll_a), .mon_clr, .reset(reset_a), .init(init_a),
    .mtj_state(mtj_a));
  dtu_neuron #(.SLOT(2)) nb (.clk, .rst_n, .sen, .rd(rd_b), .wr(8'd0), .en_wr, .wr_int(1'b0),
    .out_en(out_en_b), .out_lvl(out_lvl_b), .in_en(out_en_a), .in_lvl(out_lvl_a),
    .en_wr_ll(en_wr), .mtj_ll(mtj_a), .wr_int_ll(wr_int_ll_b), .mon_clr,
    .reset(reset_b), .init(1'b0), .mtj_state(mtj_b));
  assign wr_int_a = wr_int_ll_b;
  always #100 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int na_sw, nb_sw, none;
    real p, pm;
    repeat (2) @(negedge clk); rst_n = 1;
    // init / reset / read
    init_a = 1; @(negedge clk); init_a = 0;
    sen = 1; repeat (2) @(negedge clk); sen = 0;
    check(mtj_a == 1 && rd_a == 1 && rd_b == 0, "init and read");
    reset_a = 1; @(negedge clk); reset_a = 0;
    sen = 1; repeat (2) @(negedge clk); sen = 0;
    check(mtj_a == 0 && rd_a == 0, "reset");
    // activation race
    lvl = 8'd77; p = 77.0 / 256.0;
    na_sw = 0; nb_sw = 0; none = 0;
    repeat (3000) begin
      @(negedge clk); mon_clr = 1; @(negedge clk); mon_clr = 0;
      en_wr = 1; repeat (25) @(negedge clk); en_wr = 0;
      @(negedge clk);
      check(!(mtj_a && mtj_b), "both junctions switched");
      if (mtj_a || mtj_b) check(wr_int_a, "wr_int not raised");
      else                check(!wr_int_a, "wr_int without a switch");
      na_sw += mtj_a; nb_sw += mtj_b; none += !(mtj_a || mtj_b);
      reset_a = 1; reset_b = 1; @(negedge clk); reset_a = 0; reset_b = 0;
    end
    pm = 1.0 - (1.0 - p) * (1.0 - p);
    $display("left %0d right %0d none %0d (move prob %f)", na_sw, nb_sw, none, pm);
    check(real'(na_sw + nb_sw) / 3000.0 > pm - 0.04 && real'(na_sw + nb_sw) / 3000.0 < pm + 0.04,
          "move probability");
    check(na_sw > 0.4 * (na_sw + nb_sw) && nb_sw > 0.4 * (na_sw + nb_sw), "left/right balance");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
