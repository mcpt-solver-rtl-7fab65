// stu -- scattering tracking unit: a hardware sampler for a programmed
// discrete distribution over 2^4 = 16 events (e.g. scattering directions).
//
// The unit is a four-level conditional probability tree. Level k has one
// stochastic MTJ bit unit; its bit is 1 with a probability that depends on
// the bits already produced above it: P(A1), P(B1|A), P(C1|AB), P(D1|ABC).
// Those 1 + 2 + 4 + 8 conditional probabilities sit in FTJ synapse pairs,
// chosen by the weight selectors (level 0 is a fixed pair). By the chain rule
// the 4-bit result {A,B,C,D} (A the MSB) is drawn from the product of the
// conditionals, so any 16-bin distribution can be programmed up to the 8-bit
// synapse precision. The units are chained as in the paper: the latched
// outputs of the higher units drive the selector of each lower unit.
//
// Programming: prog_en, prog_level (0..3 = A..D), prog_idx = {higher bits,
// write direction}, prog_pos as in ftj_synapse. For a conditional probability
// p the host programs the pair (dir 0, dir 1) to (1-p, p) in 1/256 steps.
// Sampling: raise run; an RN appears on rn with rn_valid every 108 ticks
// (21.6 ns), the first one 110 ticks after the clock edge that samples run.
module stu
  import npde_pkg::*;
#(
  parameter int unsigned T_RD    = STU_T_RD,
  parameter int unsigned T_WR    = STU_T_WR,
  parameter int unsigned T_WR_PS = MTJ_T_WR_PS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       run,
  output logic [3:0] rn,
  output logic       rn_valid,
  output logic       busy,
  input  logic       prog_en,
  input  logic [1:0] prog_level,
  input  logic [3:0] prog_idx,
  input  logic       prog_pos
);
  timeunit 1ps; timeprecision 1ps;

  logic [3:0] rd, wr;
  logic [3:0] out, out_b, mtj;
  logic [7:0] vin0 [4];
  logic [7:0] vin1 [4];

  stu_controller #(.T_RD(T_RD), .T_WR(T_WR)) u_ctrl (
    .clk, .rst_n, .run, .rd, .wr, .rn_valid, .busy
  );

  // Unit k = 0..3 is MTJ_A..MTJ_D; out[0] is Out_A.
  for (genvar k = 0; k < 4; k++) begin : g_unit
    stu_bit_unit #(.T_WR_PS(T_WR_PS)) u_bit (
      .clk, .rst_n,
      .rd        (rd[k]),
      .wr        (wr[k]),
      .vin0      (vin0[k]),
      .vin1      (vin1[k]),
      .out       (out[k]),
      .out_b     (out_b[k]),
      .mtj_state (mtj[k])
    );
  end

  weight_selector #(.LEVEL(0)) u_ws_a (
    .clk, .rst_n, .sel(1'b0), .en(wr[0]), .vin0(vin0[0]), .vin1(vin1[0]),
    .prog_en(prog_en && prog_level == 2'd0), .prog_idx(prog_idx[0:0]), .prog_pos
  );
  weight_selector #(.LEVEL(1)) u_ws_b (
    .clk, .rst_n, .sel(out[0]), .en(wr[1]), .vin0(vin0[1]), .vin1(vin1[1]),
    .prog_en(prog_en && prog_level == 2'd1), .prog_idx(prog_idx[1:0]), .prog_pos
  );
  weight_selector #(.LEVEL(2)) u_ws_c (
    .clk, .rst_n, .sel({out[0], out[1]}), .en(wr[2]), .vin0(vin0[2]), .vin1(vin1[2]),
    .prog_en(prog_en && prog_level == 2'd2), .prog_idx(prog_idx[2:0]), .prog_pos
  );
  weight_selector #(.LEVEL(3)) u_ws_d (
    .clk, .rst_n, .sel({out[0], out[1], out[2]}), .en(wr[3]), .vin0(vin0[3]), .vin1(vin1[3]),
    .prog_en(prog_en && prog_level == 2'd3), .prog_idx(prog_idx[3:0]), .prog_pos
  );

  assign rn = {out[0], out[1], out[2], out[3]};
endmodule
