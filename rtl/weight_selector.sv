// weight_selector -- synapse-pair store and selector of one tree level of
// the scattering tracking unit.
//
// Level LEVEL of the conditional probability tree (0 = MTJ_A ... 3 = MTJ_D)
// needs one pair of conditional probabilities for every value of the LEVEL
// bits above it: 1, 2, 4 and 8 pairs. Each pair is two FTJ synapses,
// S_<bits>0 (strength of a write to 0, i.e. AP -> P) and S_<bits>1 (write to
// 1, P -> AP), named as in the paper: the bits are Out_A, Out_B, ... of the
// higher MTJs, then the write direction. Level 0 is the paper's "Fixed
// Weight" block with S_A0 and S_A1; levels 1-3 are weight selectors B, C, D.
// In the circuit the higher-bit outputs switch VDD onto the chosen pair
// through a transistor tree; here that tree is a multiplexer, and VDD is
// applied (vin high) only while en is high. The chosen pair appears on vin0
// and vin1 for the write driver.
//
// Programming: prog_en with prog_idx = {bits, dir} selects one synapse;
// prog_pos is the Vprog polarity (see ftj_synapse). Outputs are
// combinational in sel and en.
module weight_selector #(
  parameter int unsigned LEVEL = 3,
  localparam int unsigned SW   = (LEVEL > 0) ? LEVEL : 1,
  localparam int unsigned IW   = LEVEL + 1,
  localparam int unsigned NS   = 2 << LEVEL
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [SW-1:0] sel,       // {Out_A, Out_B, ...}, MSB = Out_A
  input  logic          en,
  output logic [7:0]    vin0,
  output logic [7:0]    vin1,
  input  logic          prog_en,
  input  logic [IW-1:0] prog_idx,
  input  logic          prog_pos
);
  timeunit 1ps; timeprecision 1ps;

  logic [7:0]    vout [NS];
  logic [IW-1:0] base;

  if (LEVEL > 0) begin : g_sel
    assign base = {sel[LEVEL-1:0], 1'b0};
  end else begin : g_fixed
    assign base = '0;
    logic unused_sel;
    assign unused_sel = ^sel;
  end

  for (genvar k = 0; k < NS; k++) begin : g_s
    ftj_synapse #(.WW(8)) u_s (
      .clk, .rst_n,
      .prog_en  (prog_en && (prog_idx == IW'(k))),
      .prog_pos (prog_pos),
      .vin      (en && ((IW'(k) | IW'(1)) == (base | IW'(1)))),
      .vout     (vout[k]),
      .weight   ()
    );
  end

  always_comb begin
    vin0 = '0;
    vin1 = '0;
    for (int unsigned k = 0; k < NS; k++) begin
      if (IW'(k) == base)            vin0 = vin0 | vout[k];
      if (IW'(k) == (base | IW'(1))) vin1 = vin1 | vout[k];
    end
  end
endmodule
