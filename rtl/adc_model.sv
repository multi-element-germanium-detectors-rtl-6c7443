// adc_model: behavioural model of one readout ADC channel.
//
// Stands for a commercial ADC digitising one buffered analog output of an ASIC. On `start` it
// samples `ain` (an analog level given as a LEVEL_W-bit code) into its track-and-hold, and
// after CONV_CYC clock cycles presents the conversion on `dout` with a one-cycle `valid`. A new
// `start` during a conversion is ignored. The ADC's resolution, latency and interface are not
// published; these are this model's choices.
module adc_model
  import mars_pkg::*;
#(
  parameter int unsigned CONV_CYC = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [LEVEL_W-1:0] ain,
  output logic [LEVEL_W-1:0] dout,
  output logic               valid
);

  logic [LEVEL_W-1:0] hold;
  logic [7:0]         cnt;
  logic               busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold  <= '0;
      cnt   <= '0;
      busy  <= 1'b0;
      dout  <= '0;
      valid <= 1'b0;
    end else begin
      valid <= 1'b0;
      if (!busy && start) begin
        hold <= ain;
        cnt  <= 8'(CONV_CYC - 1);
        busy <= 1'b1;
      end else if (busy) begin
        if (cnt == 0) begin
          busy  <= 1'b0;
          dout  <= hold;
          valid <= 1'b1;
        end else cnt <= cnt - 1'b1;
      end
    end
  end

endmodule
