// mtj_model -- behavioural model of a stochastic STT magnetic tunnel junction.
// This is a behavioural model, not synthesizable logic: it stands in for the
// analog device and uses $urandom as its source of thermal randomness.
//
// The junction holds one bit: parallel (P, low resistance) = 0 and
// anti-parallel (AP, high resistance) = 1. A probabilistic write pulse
// (wr_en high) pushes it towards wr_data. In the real device the switching
// probability follows P = 1 - exp(-t_pw/tau(I)) and is set through the write
// voltage; here it is given directly as p_code/256 for a full pulse of
// T_WR_PS. When a pulse starts, the model draws whether the junction will
// switch during it and, if so, an instant uniformly spread over the pulse.
// The switch happens at that instant only if the pulse is still on: when
// another circuit cuts the write current first (the winner-takes-all
// current monitor of the diffusion unit), the junction keeps its state.
// The uniform spread of the switching instant is this model's choice; the
// linear code-to-probability mapping is too.
//
// force_en writes force_data at once and without randomness: it models the
// large deterministic reset/initialise current. state changes at arbitrary
// instants on a 1 fs grid, not at clock edges.
//
// Ties. Two junctions racing in one write path must never switch in the same
// instant, since the simulator cannot let one of them cut the other's
// current within a single time step. The instant is therefore drawn on a
// 4 fs grid and offset by SLOT (0..3) fs; racing junctions are given
// different slots by their parent (node index mod 4). When both happen to
// draw the same grid point (probability about 1e-6 per race) the lower slot
// wins; the slot is this model's device, not a physical effect.
//
// From the paper: the 5 ns write pulse, probability set by the write voltage
// from 0 % to 100 %, and the use of the switching randomness as the entropy
// source of both units.
module mtj_model #(
  parameter int unsigned T_WR_PS = 5000,
  parameter bit          INIT    = 1'b0,
  parameter int unsigned SLOT    = 0      // tie-break offset in fs, 0..3
) (
  input  logic       wr_en,
  input  logic       wr_data,
  input  logic [7:0] p_code,
  input  logic       force_en,
  input  logic       force_data,
  output logic       state
);
  timeunit 1ps; timeprecision 1fs;

  logic        st;
  int unsigned pulse_id;

  initial begin
    st       = INIT;
    pulse_id = 0;
  end

  assign state = st;

  // Probabilistic write. The decision is taken 1 ps after the pulse starts so
  // that the write level (p_code) and target driven in the same instant have
  // settled.
  always @(posedge wr_en) begin
    pulse_id = pulse_id + 1;
    fork
      begin : attempt
        automatic int unsigned id;
        automatic int unsigned t_sw;
        id = pulse_id;
        #1;
        if (wr_en && !force_en && (wr_data != st) && (($urandom % 256) < p_code)) begin
          // switching instant in fs: uniform on a 4 fs grid, plus the slot
          t_sw = ($urandom % ((T_WR_PS - 4) * 250)) * 4 + (SLOT % 4);
          #(real'(t_sw) / 1000.0);
          if (wr_en && !force_en && (pulse_id == id)) st = wr_data;
        end
      end
    join_none
  end

  // Deterministic write.
  always @(posedge force_en or posedge force_data or negedge force_data) begin
    if (force_en) st = force_data;
  end
endmodule
