// mars_test_pulse: behavioural model of the MARS test-pulse generator.
//
// This stands for an analog circuit that injects a calibrated charge step into the channels
// selected for testing. The model detects each rising edge of the external test clock (sampled
// on the chip clock) and emits a one-cycle `tp_pulse` together with the injected charge,
// expressed in eV of deposited energy: the test-pulse DAC setting times EV_PER_LSB. That the
// generator is driven by a test clock and set from the configuration register follows the chip
// block diagram; the charge scale and the edge behaviour are this model's choices.
module mars_test_pulse
  import mars_pkg::*;
#(
  parameter int unsigned EV_PER_LSB = 200
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       test_clk,
  input  logic [TPDAC_W-1:0]         tp_amp,
  input  logic                       polarity,
  output logic                       tp_pulse,
  output logic signed [CHARGE_W-1:0] tp_charge
);

  logic [1:0] tc_q;   // two-stage sampler, then edge detect

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tc_q      <= '0;
      tp_pulse  <= 1'b0;
      tp_charge <= '0;
    end else begin
      tc_q     <= {tc_q[0], test_clk};
      tp_pulse <= tc_q[0] && !tc_q[1];
      // charge of the sign the channels are set to accept
      tp_charge <= polarity ? -CHARGE_W'(tp_amp * EV_PER_LSB) : CHARGE_W'(tp_amp * EV_PER_LSB);
    end
  end

endmodule
