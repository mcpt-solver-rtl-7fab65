// dtu_controller -- sequencer of the diffusion tracking unit.
//
// One neural activation cycle (one walk step) has four phases, as in the
// paper: Read (sense all neurons; the walker's neuron answers 1), Transmit
// (the walker's rd, scaled by its FTJ synapse, reaches the wr pins of its left
// neighbour), Activate (the probabilistic series write; winner-takes-all by
// the current monitors) and Reset (self-inhibition: if a neighbour won, the
// old neuron is written back to 0). Phase lengths are 2 + 1 + 25 + 22 ticks =
// 50 ticks = 10 ns; the 5 ns write and the 10 ns step are the paper's, the
// split of the rest is this design's choice.
//
// Around the steps the controller runs the walk schedule the paper gives for
// the steady-state problem: W walkers start from node start_pos, each is
// tracked until it reaches the absorbing last node N-1, and after every read
// the visit counter n[start_pos][pos] is incremented, pos being the node
// read (the start node is counted once, the absorbing node never). Between
// walkers every neuron is cleared and the start neuron is initialised.
//
// Interface: start (one-tick pulse while idle) latches start_pos and
// num_walkers; busy is high until done pulses. rd_vec is the PCSA outputs of
// all neurons. The read must show exactly one walker; an assertion checks it.
module dtu_controller
  import npde_pkg::*;
#(
  parameter int unsigned N     = 50,
  parameter int unsigned T_RD  = DTU_T_RD,
  parameter int unsigned T_TX  = DTU_T_TX,
  parameter int unsigned T_ACT = DTU_T_ACT,
  parameter int unsigned T_RST = DTU_T_RST,
  localparam int unsigned AW   = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] start_pos,
  input  logic [31:0]   num_walkers,
  input  logic [N-1:0]  rd_vec,
  output logic          sen,
  output logic          syn_en,     // synapses in operational mode, Vin = rd
  output logic          en_wr,
  output logic          rst_phase,
  output logic          clear_all,
  output logic          init_en,
  output logic [AW-1:0] init_pos,
  output logic          mon_clr,
  output logic          cnt_inc,
  output logic [AW-1:0] cnt_i,
  output logic [AW-1:0] cnt_j,
  output logic          busy,
  output logic          done,
  output logic [31:0]   walkers_done,
  output logic [31:0]   steps
);
  timeunit 1ps; timeprecision 1ps;

  dtu_state_e    state;
  logic [7:0]    tcnt;
  logic [AW-1:0] pos_r;
  logic [31:0]   walkers_left;
  logic [AW-1:0] pos;
  logic          found;

  // Position of the walker from the read vector.
  always_comb begin
    pos   = '0;
    found = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      if (rd_vec[k] && !found) begin
        pos   = AW'(k);
        found = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= DTU_IDLE;
      tcnt         <= '0;
      pos_r        <= '0;
      walkers_left <= '0;
      walkers_done <= '0;
      steps        <= '0;
      cnt_inc      <= 1'b0;
      cnt_j        <= '0;
      done         <= 1'b0;
    end else begin
      cnt_inc <= 1'b0;
      done    <= 1'b0;
      unique case (state)
        DTU_IDLE: begin
          if (start) begin
            pos_r        <= start_pos;
            walkers_left <= num_walkers;
            walkers_done <= '0;
            steps        <= '0;
            state        <= (num_walkers == 0) ? DTU_DONE : DTU_CLEAR;
          end
        end
        DTU_CLEAR: state <= DTU_INIT;
        DTU_INIT: begin
          state <= DTU_READ;
          tcnt  <= '0;
        end
        DTU_READ: begin
          if (tcnt == 8'(T_RD - 1)) begin
            tcnt <= '0;
            state <= DTU_TX;
          end else begin
            tcnt <= tcnt + 1'b1;
          end
        end
        DTU_TX: begin
          // rd_vec now holds the read of this step.
          if (tcnt == 0) begin
            if (pos == AW'(N - 1)) begin
              // Absorbed at x = L: this walker is finished.
              walkers_done <= walkers_done + 1'b1;
              walkers_left <= walkers_left - 1'b1;
              state        <= (walkers_left == 32'd1) ? DTU_DONE : DTU_CLEAR;
            end else begin
              cnt_inc <= 1'b1;
              cnt_j   <= pos;
              if (T_TX == 1) state <= DTU_ACT;
              else tcnt <= tcnt + 1'b1;
            end
          end else if (tcnt == 8'(T_TX - 1)) begin
            tcnt  <= '0;
            state <= DTU_ACT;
          end else begin
            tcnt <= tcnt + 1'b1;
          end
        end
        DTU_ACT: begin
          if (tcnt == 8'(T_ACT - 1)) begin
            tcnt  <= '0;
            state <= DTU_RST;
          end else begin
            tcnt <= tcnt + 1'b1;
          end
        end
        DTU_RST: begin
          if (tcnt == 8'(T_RST - 1)) begin
            tcnt  <= '0;
            steps <= steps + 1'b1;
            state <= DTU_READ;
          end else begin
            tcnt <= tcnt + 1'b1;
          end
        end
        DTU_DONE: begin
          done  <= 1'b1;
          state <= DTU_IDLE;
        end
        default: state <= DTU_IDLE;
      endcase
    end
  end

  assign sen       = (state == DTU_READ);
  assign syn_en    = (state == DTU_TX) || (state == DTU_ACT);
  assign en_wr     = (state == DTU_ACT);
  assign rst_phase = (state == DTU_RST);
  assign clear_all = (state == DTU_CLEAR);
  assign init_en   = (state == DTU_INIT);
  assign init_pos  = pos_r;
  assign mon_clr   = (state == DTU_READ);
  assign cnt_i     = pos_r;
  assign busy      = (state != DTU_IDLE);

  // Winner-takes-all and self-inhibition leave exactly one active neuron.
  a_one_walker: assert property (@(posedge clk) disable iff (!rst_n)
    (state == DTU_TX && tcnt == 0) |-> $onehot(rd_vec));
endmodule
