// stu_bit_unit -- one random-bit generation unit of the scattering unit.
//
// The unit holds an MTJ, its PCSA sense amplifier and a write driver. A read
// (rd high for two ticks) latches the MTJ state on out. The inverted readout
// out_b is the write driver's Data_in, so the following write (wr high for
// 25 ticks = 5 ns) always tries to flip the junction: with strength vin1 when
// it is 0 (P -> AP) and vin0 when it is 1 (AP -> P). The strengths come from
// the synapse pair the weight selector picked. If the pair is programmed as
// (1-p, p) the new state is 1 with probability p whatever the old state was,
// which is how a tree node produces its conditional bit. The write driver's
// own circuit is not published; here it is the selection of vin0/vin1 by
// Data_in and the gating by wr.
//
// From the paper: the MTJ + PCSA + write driver make-up, the inverted readout
// as Data_in, and vin0/vin1 as the strengths of the two switching directions.
// This design's choice: programming a pair as (1-p, p) so that the output bit
// does not depend on the previous state. Timing: out is valid from the second
// read tick; the write lasts as long as wr is high.
module stu_bit_unit #(
  parameter int unsigned T_WR_PS = 5000
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rd,
  input  logic       wr,
  input  logic [7:0] vin0,
  input  logic [7:0] vin1,
  output logic       out,
  output logic       out_b,
  output logic       mtj_state
);
  timeunit 1ps; timeprecision 1ps;

  logic       data_in;
  logic [7:0] drv_p;

  // Write driver.
  assign data_in = out_b;
  assign drv_p   = data_in ? vin1 : vin0;

  mtj_model #(.T_WR_PS(T_WR_PS), .INIT(1'b0)) u_mtj (
    .wr_en      (wr),
    .wr_data    (data_in),
    .p_code     (drv_p),
    .force_en   (1'b0),
    .force_data (1'b0),
    .state      (mtj_state)
  );

  pcsa u_sa (
    .clk       (clk),
    .rst_n     (rst_n),
    .sen       (rd),
    .mtj_state (mtj_state),
    .rd        (out),
    .rd_b      (out_b)
  );
endmodule
