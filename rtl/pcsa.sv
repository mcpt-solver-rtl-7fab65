// pcsa -- behavioural model of the pre-charge sense amplifier (PCSA).
// This is a behavioural model of an analog circuit written as clocked logic.
//
// The PCSA compares the MTJ against a reference resistor. While sen is high
// it first precharges both branches (one tick, 0.2 ns) and then amplifies the
// difference (one tick, 0.2 ns); at the end of the amplification tick the
// result is latched on rd and its complement on rd_b. Between reads the
// latched value is held, as the published waveforms show Out staying valid
// between read pulses. Interface: sen must be held for at least two ticks;
// rd changes on the clock edge that ends the second tick and on every further
// tick that sen stays high. Reset clears rd to 0 (not specified in the paper).
module pcsa (
  input  logic clk,
  input  logic rst_n,
  input  logic sen,
  input  logic mtj_state,
  output logic rd,
  output logic rd_b
);
  timeunit 1ps; timeprecision 1ps;

  logic precharged;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      precharged <= 1'b0;
      rd         <= 1'b0;
    end else if (sen) begin
      precharged <= 1'b1;
      if (precharged) rd <= mtj_state;
    end else begin
      precharged <= 1'b0;
    end
  end

  assign rd_b = ~rd;
endmodule
