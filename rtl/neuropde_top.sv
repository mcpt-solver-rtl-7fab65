// neuropde_top -- NeuroPDE+ accelerator: a diffusion tracking unit and a
// scattering tracking unit side by side.
//
// The accelerator offloads the particle-tracking phase of Monte Carlo PDE
// solvers. A host initialises it (programs synapse weights, places walkers),
// the two units track particles on their own, and the host collects the
// results: the walk-history matrix n[i][j] from the DTU and the stream of
// sampled 4-bit scattering events from the STU. The two units are
// independent, as in the paper, so the top only gives each its own host
// ports. Clock: one 0.2 ns tick; rst_n is an asynchronous active-low reset.
module neuropde_top
  import npde_pkg::*;
#(
  parameter int unsigned N  = 50,
  parameter int unsigned CW = 32,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  // DTU host interface
  input  logic          dtu_syn_prog_en,
  input  logic [AW-1:0] dtu_syn_prog_sel,
  input  logic          dtu_syn_prog_pos,
  input  logic          dtu_start,
  input  logic [AW-1:0] dtu_start_pos,
  input  logic [31:0]   dtu_num_walkers,
  output logic          dtu_busy,
  output logic          dtu_done,
  output logic [31:0]   dtu_walkers_done,
  output logic [31:0]   dtu_steps,
  input  logic          dtu_cnt_clr,
  output logic          dtu_cnt_clearing,
  input  logic [AW-1:0] dtu_cnt_rd_i,
  input  logic [AW-1:0] dtu_cnt_rd_j,
  output logic [CW-1:0] dtu_cnt_rd_data,
  output logic [N-1:0]  dtu_mtj_vec,
  output logic [N-1:0]  dtu_moved_left,
  output logic [N-1:0]  dtu_moved_right,
  // STU host interface
  input  logic          stu_prog_en,
  input  logic [1:0]    stu_prog_level,
  input  logic [3:0]    stu_prog_idx,
  input  logic          stu_prog_pos,
  input  logic          stu_run,
  output logic [3:0]    stu_rn,
  output logic          stu_rn_valid,
  output logic          stu_busy
);
  timeunit 1ps; timeprecision 1ps;

  dtu #(.N(N), .CW(CW)) u_dtu (
    .clk, .rst_n,
    .syn_prog_en  (dtu_syn_prog_en),
    .syn_prog_sel (dtu_syn_prog_sel),
    .syn_prog_pos (dtu_syn_prog_pos),
    .start        (dtu_start),
    .start_pos    (dtu_start_pos),
    .num_walkers  (dtu_num_walkers),
    .busy         (dtu_busy),
    .done         (dtu_done),
    .walkers_done (dtu_walkers_done),
    .steps        (dtu_steps),
    .cnt_clr      (dtu_cnt_clr),
    .cnt_clearing (dtu_cnt_clearing),
    .cnt_rd_i     (dtu_cnt_rd_i),
    .cnt_rd_j     (dtu_cnt_rd_j),
    .cnt_rd_data  (dtu_cnt_rd_data),
    .mtj_vec      (dtu_mtj_vec),
    .moved_left   (dtu_moved_left),
    .moved_right  (dtu_moved_right)
  );

  stu u_stu (
    .clk, .rst_n,
    .run        (stu_run),
    .rn         (stu_rn),
    .rn_valid   (stu_rn_valid),
    .busy       (stu_busy),
    .prog_en    (stu_prog_en),
    .prog_level (stu_prog_level),
    .prog_idx   (stu_prog_idx),
    .prog_pos   (stu_prog_pos)
  );
endmodule
