// dtu_visit_mem -- walk-history matrix n[i][j] of the diffusion unit.
//
// n[i][j] counts how many steps walkers started at node i spent on node j;
// the host turns the matrix into the PDE solution u_i = -(F dt / W) *
// sum_j n[i][j] (L - X_j). The paper shows this N x N matrix being handed
// from the diffusion unit to the host; keeping it in an on-chip counter
// memory is this design's choice.
//
// The matrix is a memory of N*N words of CW bits at address i*N + j.
// inc adds one (saturating) to word (inc_i, inc_j) on the clock edge. clr
// starts a sweep that zeroes one word per tick; clearing stays high until the
// sweep ends and increments are ignored meanwhile. The host reads word
// (rd_i, rd_j) with one tick of latency on rd_data.
module dtu_visit_mem #(
  parameter int unsigned N  = 50,
  parameter int unsigned CW = 32,
  localparam int unsigned AW = $clog2(N),
  localparam int unsigned MW = $clog2(N * N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  output logic          clearing,
  input  logic          inc,
  input  logic [AW-1:0] inc_i,
  input  logic [AW-1:0] inc_j,
  input  logic [AW-1:0] rd_i,
  input  logic [AW-1:0] rd_j,
  output logic [CW-1:0] rd_data
);
  timeunit 1ps; timeprecision 1ps;

  localparam int unsigned DEPTH = N * N;

  logic [CW-1:0] mem [DEPTH];
  logic [MW-1:0] clr_addr;
  logic [MW-1:0] inc_addr;
  logic [MW-1:0] rd_addr;

  assign inc_addr = MW'(inc_i) * MW'(N) + MW'(inc_j);
  assign rd_addr  = MW'(rd_i) * MW'(N) + MW'(rd_j);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing <= 1'b0;
      clr_addr <= '0;
    end else if (clr) begin
      clearing <= 1'b1;
      clr_addr <= '0;
    end else if (clearing) begin
      if (clr_addr == MW'(DEPTH - 1)) clearing <= 1'b0;
      clr_addr <= clr_addr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (clearing) begin
      mem[clr_addr] <= '0;
    end else if (inc && (mem[inc_addr] != '1)) begin
      mem[inc_addr] <= mem[inc_addr] + 1'b1;
    end
    rd_data <= mem[rd_addr];
  end
endmodule
