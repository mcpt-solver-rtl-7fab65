// ftj_synapse -- behavioural model of the ferroelectric (FTJ) synapse.
// This is a behavioural model of an analog cell written as clocked logic.
//
// The cell is an FTJ in series with a fixed resistor R behind two PMOS
// switches. In programming mode (Vg0 low, here prog_en) Vprog is applied to
// the FTJ: a positive pulse grows the down-polarised domain and raises the
// resistance, a negative pulse resets the domain wall. In operational mode
// (Vg1 low) the cell divides Vin as R_FTJ/(R_FTJ+R) and passes the scaled
// voltage on as Vout, which sets the write strength of an MTJ.
//
// Here the domain state is an 8-bit weight code. One tick of positive
// programming (prog_pos=1) moves it up by one LSB, saturating at 255; one
// tick of negative programming (prog_pos=0) resets it to 0, as the negative
// Vprog resets the domain wall in the published transient. The divider
// output is the code itself while vin is high and the cell is not being
// programmed, and 0 otherwise. Both the one-LSB-per-tick step and the linear
// code are this model's choices; the paper reports about 8 bits of usable
// precision for the synapse. Timing: the code updates on the clock edge,
// vout follows vin combinationally.
module ftj_synapse #(
  parameter int unsigned WW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          prog_en,
  input  logic          prog_pos,
  input  logic          vin,
  output logic [WW-1:0] vout,
  output logic [WW-1:0] weight
);
  timeunit 1ps; timeprecision 1ps;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      weight <= '0;
    end else if (prog_en) begin
      if (!prog_pos)        weight <= '0;
      else if (weight != '1) weight <= weight + 1'b1;
    end
  end

  assign vout = (vin && !prog_en) ? weight : '0;
endmodule
