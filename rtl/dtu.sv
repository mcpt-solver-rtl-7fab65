// dtu -- diffusion tracking unit: a random walk on a 1-D Markov chain.
//
// N neurons stand for the N grid nodes. The walker is the one neuron whose
// MTJ is 1. Each neuron i owns one FTJ synapse S_i; its input is rd of
// neuron i and its output drives pin wr of neuron i-1 (S_{i+1} -> wr_i, as in
// the published array). out_i is wired to in_{i+2}. So when the walker sits
// on node k, its synapse drives a write current through MTJ_{k-1} and then
// MTJ_{k+1} in series; both are pushed towards 1 with the same strength and
// the first to switch cuts the current (winner-takes-all by the monitor in
// neuron k+1). With a per-junction probability p the walker stays with
// probability (1-p)^2 and moves left or right with equal probability; the
// host therefore programs p = 1 - sqrt(P_s). If a neighbour won, the monitor
// output wr_int_{k-1} triggers the reset of neuron k (self-inhibition).
//
// Ends of the chain, which the paper does not draw: node 0 has no left
// neighbour, so its synapse S_0 drives a path that writes MTJ_1 alone,
// giving the reflecting rule of the paper's algorithm (move right with 2P_g,
// host programs S_0 with 2P_g); node N-1 is absorbing and ends the walk.
//
// The controller (dtu_controller) runs W walkers from one start node and
// the visit counters (dtu_visit_mem) record n[start][node]. Synapses are
// programmed by the host: syn_prog_en with syn_prog_sel chooses S_sel,
// syn_prog_pos gives the pulse polarity (see ftj_synapse). Timing: one step
// is 50 ticks (10 ns) of the 0.2 ns clock.
module dtu
  import npde_pkg::*;
#(
  parameter int unsigned N       = 50,
  parameter int unsigned CW      = 32,
  parameter int unsigned T_WR_PS = MTJ_T_WR_PS,
  localparam int unsigned AW     = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  // synapse programming
  input  logic          syn_prog_en,
  input  logic [AW-1:0] syn_prog_sel,
  input  logic          syn_prog_pos,
  // command
  input  logic          start,
  input  logic [AW-1:0] start_pos,
  input  logic [31:0]   num_walkers,
  output logic          busy,
  output logic          done,
  output logic [31:0]   walkers_done,
  output logic [31:0]   steps,
  // visit counters
  input  logic          cnt_clr,
  output logic          cnt_clearing,
  input  logic [AW-1:0] cnt_rd_i,
  input  logic [AW-1:0] cnt_rd_j,
  output logic [CW-1:0] cnt_rd_data,
  // observation
  output logic [N-1:0]  mtj_vec,
  output logic [N-1:0]  moved_left,
  output logic [N-1:0]  moved_right
);
  timeunit 1ps; timeprecision 1ps;

  logic          sen, syn_en, en_wr, rst_phase, clear_all, init_en, mon_clr;
  logic [AW-1:0] init_pos;
  logic          cnt_inc;
  logic [AW-1:0] cnt_i, cnt_j;

  logic [N-1:0]  rd_vec;
  logic [7:0]    syn_out   [N];
  logic [7:0]    wr_lvl    [N];
  logic [N-1:0]  wr_int;          // wr_int_i, produced in neuron i+2
  logic [N-1:0]  wr_int_ll;       // output of neuron i's monitor = wr_int_{i-2}
  logic [N-1:0]  out_en;
  logic [7:0]    out_lvl   [N];
  logic [N-1:0]  in_en;
  logic [7:0]    in_lvl    [N];
  logic [N-1:0]  en_wr_ll;
  logic [N-1:0]  mtj_ll;
  logic [N-1:0]  reset_vec;

  // Boundary path from S_0 into MTJ_1.
  logic          b_en;
  logic [7:0]    b_lvl;
  logic          b_wr_int;

  dtu_controller #(.N(N)) u_ctrl (
    .clk, .rst_n, .start, .start_pos, .num_walkers, .rd_vec,
    .sen, .syn_en, .en_wr, .rst_phase, .clear_all, .init_en, .init_pos,
    .mon_clr, .cnt_inc, .cnt_i, .cnt_j, .busy, .done, .walkers_done, .steps
  );

  dtu_visit_mem #(.N(N), .CW(CW)) u_cnt (
    .clk, .rst_n, .clr(cnt_clr), .clearing(cnt_clearing),
    .inc(cnt_inc), .inc_i(cnt_i), .inc_j(cnt_j),
    .rd_i(cnt_rd_i), .rd_j(cnt_rd_j), .rd_data(cnt_rd_data)
  );

  for (genvar i = 0; i < N; i++) begin : g_syn
    ftj_synapse #(.WW(8)) u_syn (
      .clk, .rst_n,
      .prog_en  (syn_prog_en && (syn_prog_sel == AW'(i))),
      .prog_pos (syn_prog_pos),
      .vin      (rd_vec[i] && syn_en),
      .vout     (syn_out[i]),
      .weight   ()
    );
  end

  assign b_lvl = syn_out[0];
  assign b_en  = en_wr && !b_wr_int && (b_lvl != '0);

  for (genvar i = 0; i < N; i++) begin : g_wire
    // S_{i+1} drives wr_i; the last neuron has no right synapse.
    if (i + 1 < N) begin : g_wr
      assign wr_lvl[i] = syn_out[i+1];
    end else begin : g_wr_end
      assign wr_lvl[i] = '0;
    end
    // The monitor of neuron i+2 produces wr_int_i.
    if (i + 2 < N) begin : g_int
      assign wr_int[i] = wr_int_ll[i+2];
    end else begin : g_int_end
      assign wr_int[i] = 1'b0;
    end
    // Pin in_i is fed by out_{i-2}; in_1 by the boundary path of S_0.
    if (i >= 2) begin : g_in
      assign in_en[i]    = out_en[i-2];
      assign in_lvl[i]   = out_lvl[i-2];
      assign en_wr_ll[i] = en_wr;
      assign mtj_ll[i]   = mtj_vec[i-2];
    end else if (i == 1) begin : g_in_b
      assign in_en[i]    = b_en;
      assign in_lvl[i]   = b_lvl;
      assign en_wr_ll[i] = en_wr;
      assign mtj_ll[i]   = 1'b0;
    end else begin : g_in_0
      assign in_en[i]    = 1'b0;
      assign in_lvl[i]   = '0;
      assign en_wr_ll[i] = 1'b0;
      assign mtj_ll[i]   = 1'b0;
    end
    // Self-inhibition: neuron k resets when the path it drove (k-1 -> k+1)
    // reported a switch; for k = 0 that is the boundary path.
    if (i >= 1) begin : g_rst
      assign reset_vec[i] = clear_all || (rst_phase && wr_int[i-1]);
    end else begin : g_rst0
      assign reset_vec[i] = clear_all || (rst_phase && b_wr_int);
    end
  end

  assign b_wr_int = wr_int_ll[1];

  for (genvar i = 0; i < N; i++) begin : g_neu
    dtu_neuron #(.T_WR_PS(T_WR_PS), .SLOT(i % 4)) u_n (
      .clk, .rst_n,
      .sen       (sen),
      .rd        (rd_vec[i]),
      .wr        (wr_lvl[i]),
      .en_wr     (en_wr),
      .wr_int    (wr_int[i]),
      .out_en    (out_en[i]),
      .out_lvl   (out_lvl[i]),
      .in_en     (in_en[i]),
      .in_lvl    (in_lvl[i]),
      .en_wr_ll  (en_wr_ll[i]),
      .mtj_ll    (mtj_ll[i]),
      .wr_int_ll (wr_int_ll[i]),
      .mon_clr   (mon_clr),
      .reset     (reset_vec[i]),
      .init      (init_en && (init_pos == AW'(i))),
      .mtj_state (mtj_vec[i])
    );
  end

  // Which way each step went, for observation: the path of walker k
  // reported a switch of MTJ_{k-1} (left) or MTJ_{k+1} (right).
  for (genvar i = 0; i < N; i++) begin : g_obs
    if (i >= 1 && i + 1 < N) begin : g_mid
      assign moved_left[i]  = rst_phase && rd_vec[i] && wr_int[i-1] && mtj_vec[i-1];
      assign moved_right[i] = rst_phase && rd_vec[i] && wr_int[i-1] && mtj_vec[i+1];
    end else if (i == 0) begin : g_first
      assign moved_left[i]  = 1'b0;
      assign moved_right[i] = rst_phase && rd_vec[0] && b_wr_int && mtj_vec[1];
    end else begin : g_last
      assign moved_left[i]  = 1'b0;
      assign moved_right[i] = 1'b0;
    end
  end
endmodule
