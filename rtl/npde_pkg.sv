// npde_pkg -- shared constants and types of the NeuroPDE+ RTL.
//
// Every clocked block runs on one tick clock of 0.2 ns (5 GHz). The tick is
// this design's choice: it is the length of the sense-amplifier precharge and
// amplification sub-phases, so the published phase lengths become whole tick
// counts: a 0.4 ns MTJ read is 2 ticks, a 5 ns probabilistic write is 25
// ticks, one scattering-unit sample (21.6 ns) is 108 ticks and one diffusion
// step (10 ns) is 50 ticks. Synapse weights are 8-bit codes, matching the
// roughly 8-bit effective resolution reported for the FTJ synapse; a code c
// stands for a switching probability of c/256 per full write pulse.
package npde_pkg;
  timeunit 1ps; timeprecision 1ps;

  localparam int unsigned WW      = 8;            // synapse weight code width
  localparam int unsigned MTJ_T_WR_PS = 5000;     // MTJ write pulse, 5 ns

  typedef logic [WW-1:0] weight_t;

  // Scattering tracking unit: phase lengths in ticks.
  localparam int unsigned STU_T_RD = 2;           // 0.2 ns precharge + 0.2 ns amplify
  localparam int unsigned STU_T_WR = 25;          // 5 ns write

  // Diffusion tracking unit: phase lengths in ticks (sum = 50 ticks = 10 ns).
  localparam int unsigned DTU_T_RD  = 2;
  localparam int unsigned DTU_T_TX  = 1;
  localparam int unsigned DTU_T_ACT = 25;
  localparam int unsigned DTU_T_RST = 22;

  typedef enum logic [1:0] {
    STU_IDLE,
    STU_READ,
    STU_WRITE,
    STU_FLUSH
  } stu_state_e;

  typedef enum logic [2:0] {
    DTU_IDLE,
    DTU_CLEAR,
    DTU_INIT,
    DTU_READ,
    DTU_TX,
    DTU_ACT,
    DTU_RST,
    DTU_DONE
  } dtu_state_e;
endpackage
