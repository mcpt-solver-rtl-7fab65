// stu_controller -- phase sequencer of the scattering tracking unit.
//
// One random number (RN) takes four phases, one per tree level k = 0..3
// (MTJ_A..MTJ_D). Phase k first reads two junctions for T_RD ticks and then
// writes MTJ_k for T_WR ticks: phase 0 reads A (its current state, to flip it)
// together with D (finishing the previous RN); phase k > 0 reads MTJ_{k-1}
// (its fresh bit selects the synapse pair for level k) and MTJ_k. With the
// defaults a phase is 2 + 25 = 27 ticks and an RN 108 ticks = 21.6 ns, the
// paper's generation cycle. These read pairs and the overlap of the last
// read of D with the next first read of A follow the paper's workflow and
// waveforms; the tick counts follow its 0.2/0.2/5 ns phase lengths.
//
// Interface: while run is high, RNs are generated back to back. rn_valid is
// high for one tick after the phase-0 read of the next RN (or after a final
// read of D once run has dropped); in that tick the four PCSA outputs hold
// the finished RN. rd[k] and wr[k] are the Rd_k / Wr_k strobes of unit k.
module stu_controller
  import npde_pkg::*;
#(
  parameter int unsigned T_RD = STU_T_RD,
  parameter int unsigned T_WR = STU_T_WR
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       run,
  output logic [3:0] rd,
  output logic [3:0] wr,
  output logic       rn_valid,
  output logic       busy
);
  timeunit 1ps; timeprecision 1ps;

  stu_state_e state;
  logic [1:0] phase;
  logic [7:0] tcnt;
  logic       have_rn;   // an RN is waiting for its read of D

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= STU_IDLE;
      phase    <= '0;
      tcnt     <= '0;
      have_rn  <= 1'b0;
      rn_valid <= 1'b0;
    end else begin
      rn_valid <= 1'b0;
      unique case (state)
        STU_IDLE: begin
          if (run) begin
            state <= STU_READ;
            phase <= '0;
            tcnt  <= '0;
          end
        end
        STU_READ: begin
          if (tcnt == 8'(T_RD - 1)) begin
            tcnt  <= '0;
            state <= STU_WRITE;
            if (phase == 2'd0 && have_rn) rn_valid <= 1'b1;
          end else begin
            tcnt <= tcnt + 1'b1;
          end
        end
        STU_WRITE: begin
          if (tcnt == 8'(T_WR - 1)) begin
            tcnt <= '0;
            if (phase == 2'd3) begin
              have_rn <= 1'b1;
              phase   <= '0;
              state   <= run ? STU_READ : STU_FLUSH;
            end else begin
              phase <= phase + 1'b1;
              state <= STU_READ;
            end
          end else begin
            tcnt <= tcnt + 1'b1;
          end
        end
        STU_FLUSH: begin
          if (tcnt == 8'(T_RD - 1)) begin
            tcnt     <= '0;
            rn_valid <= 1'b1;
            have_rn  <= 1'b0;
            state    <= STU_IDLE;
          end else begin
            tcnt <= tcnt + 1'b1;
          end
        end
        default: state <= STU_IDLE;
      endcase
    end
  end

  always_comb begin
    rd = '0;
    wr = '0;
    unique case (state)
      STU_READ: begin
        if (phase == 2'd0) rd = 4'b1001;
        else begin
          rd[phase]      = 1'b1;
          rd[phase - 1'b1] = 1'b1;
        end
      end
      STU_WRITE: wr[phase] = 1'b1;
      STU_FLUSH: rd[3] = 1'b1;
      default: ;
    endcase
  end

  assign busy = (state != STU_IDLE);

  // A junction is never read and written at the same time.
  a_rd_wr_apart: assert property (@(posedge clk) disable iff (!rst_n) (rd & wr) == '0);
endmodule
