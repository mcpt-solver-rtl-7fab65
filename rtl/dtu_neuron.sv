// dtu_neuron -- one neuron of the diffusion tracking unit (DTU).
//
// A neuron stands for one grid node X_i; its MTJ is 1 (AP) while the random
// walker sits on that node. It contains, as in the published neuron circuit:
//   * the MTJ (mtj_model) and its PCSA sense amplifier (pcsa), read by sen;
//   * the write gate P0, conducting when en_wr is high and the write
//     interrupt wr_int from the monitor further right is low (the OR of
//     en_wr-bar and wr_int drives the PMOS gate);
//   * the series write path: the synaptic level on wr drives MTJ_i and leaves
//     through out towards in of neuron i+2; a level arriving on in writes
//     this neuron's MTJ as the second junction of neuron i-2's path;
//   * the current monitor of the path coming from neuron i-2, which produces
//     wr_int for neuron i-2 (wr_int_ll);
//   * the reset path (self-inhibition), which writes P (0) deterministically.
// init writes AP (1) deterministically; it is how the host places a walker,
// which the paper leaves to the host's initialisation step.
//
// Both junctions of a path are written towards AP with the same strength;
// whichever switches first cuts the current for the other. Timing: en_wr,
// sen, reset and init come from the clocked DTU controller; MTJ switching
// happens at random instants inside the activation window.
module dtu_neuron #(
  parameter int unsigned T_WR_PS = 5000,
  parameter int unsigned SLOT    = 0      // MTJ tie-break slot (node index mod 4)
) (
  input  logic       clk,
  input  logic       rst_n,
  // read side
  input  logic       sen,
  output logic       rd,
  // own write path
  input  logic [7:0] wr,          // level on pin wr (from synapse S_{i+1})
  input  logic       en_wr,
  input  logic       wr_int,      // from the monitor in neuron i+2
  output logic       out_en,      // current leaves through pin out
  output logic [7:0] out_lvl,
  // path from neuron i-2
  input  logic       in_en,
  input  logic [7:0] in_lvl,
  input  logic       en_wr_ll,    // en_wr of neuron i-2 (gate of N1/N3)
  input  logic       mtj_ll,      // state of MTJ_{i-2}
  output logic       wr_int_ll,
  input  logic       mon_clr,
  // deterministic writes
  input  logic       reset,
  input  logic       init,
  output logic       mtj_state
);
  timeunit 1ps; timeprecision 1ps;

  logic       p0_on;
  logic       mtj_wr_en;
  logic [7:0] mtj_p;

  // OR_i of en_wr-bar and wr_int drives P0 (active low).
  assign p0_on   = en_wr && !wr_int;
  assign out_en  = p0_on && (wr != '0);
  assign out_lvl = wr;

  // The junction carries current from its own path or from neuron i-2's.
  assign mtj_wr_en = out_en || in_en;
  assign mtj_p     = out_en ? wr : in_lvl;

  mtj_model #(.T_WR_PS(T_WR_PS), .INIT(1'b0), .SLOT(SLOT)) u_mtj (
    .wr_en      (mtj_wr_en),
    .wr_data    (1'b1),
    .p_code     (mtj_p),
    .force_en   (reset || init),
    .force_data (init),
    .state      (mtj_state)
  );

  pcsa u_sa (
    .clk       (clk),
    .rst_n     (rst_n),
    .sen       (sen),
    .mtj_state (mtj_state),
    .rd        (rd),
    .rd_b      ()
  );

  current_monitor u_cm (
    .clk     (clk),
    .rst_n   (rst_n),
    .clr     (mon_clr),
    .path_en (en_wr_ll && (in_lvl != '0)),
    .mtj     ({mtj_ll, mtj_state}),
    .wr_int  (wr_int_ll)
  );
endmodule
