// current_monitor -- behavioural model of the diffusion-unit current monitor.
// This is a behavioural model of an analog circuit (current mirror and
// inverter pair) written as logic.
//
// In the diffusion unit a write current runs from neuron N_i through MTJ_i,
// out of pin out_i, into pin in_{i+2}, through MTJ_{i+2} and this monitor to
// ground. When either junction switches to the high-resistance state the
// current drops; the monitor sees that and raises wr_int, which turns off the
// write transistor of N_i, so at most one of the two junctions switches
// (winner-takes-all). Here the drop is detected as a change of either
// junction state against the value captured while the path was idle.
// wr_int rises in the same instant as the switch (combinational path) so the
// partner junction's pending switch is cancelled, and it is then held in a
// flop until clr so that it can drive the reset (self-inhibition) of the
// original neuron in the following phase. path_en says a write current can
// flow in this path (its enable and a non-zero drive level).
//
// The paper gives the monitor's place in the path and its job (assert wr_int
// on a current change, which gates off the write transistor and later drives
// the reset). Detecting the change as a junction-state change, the armed flag
// and the hold-until-clr flop are this design's choices. Timing: wr_int is
// combinational at the switch instant and registered on the next clock.
module current_monitor (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clr,
  input  logic       path_en,
  input  logic [1:0] mtj,
  output logic       wr_int
);
  timeunit 1ps; timeprecision 1ps;

  logic [1:0] base;
  logic       hit;
  logic       armed;   // path has carried current since the last clr
  logic       change;

  // A switch can land in the last partial clock of the window, after path_en
  // has already dropped; armed keeps base frozen so that it is still seen.
  assign change = (path_en || armed) && (mtj != base);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base  <= '0;
      hit   <= 1'b0;
      armed <= 1'b0;
    end else if (clr) begin
      base  <= mtj;
      hit   <= 1'b0;
      armed <= 1'b0;
    end else begin
      if (path_en) armed <= 1'b1;
      if (!path_en && !armed && !hit) base <= mtj;
      if (change) hit <= 1'b1;
    end
  end

  assign wr_int = hit || change;
endmodule
