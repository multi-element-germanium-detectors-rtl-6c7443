// mars_channel_logic: the digital register and control logic of one MARS channel.
//
// The channel's analog part raises `peak` when its peak detector holds a pulse amplitude. This
// logic turns that into a readout request: a pending latch is set on the rising edge of `peak`
// unless the channel is masked. When the global logic acknowledges the channel (`ack`), the
// latch is cleared and a one-cycle `pd_clear` pulse resets the peak detector so the channel can
// take the next photon. A masked channel's peak detector is released at once, so it never
// blocks. Test pulses from the chip-wide generator reach the channel only when its tp_en bit is
// set. The existence of per-channel register and control logic follows the channel diagram; its
// exact behaviour is this design's.
module mars_channel_logic
  import mars_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  chan_cfg_t ccfg,
  input  logic      peak,      // analog peak detector holds a value
  input  logic      ack,       // global logic has read this channel
  input  logic      tp_pulse,  // chip-wide test pulse
  output logic      req,       // event waiting for readout
  output logic      pd_clear,  // reset the peak detector
  output logic      tp_inj     // inject test charge into this channel
);

  logic peak_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      peak_q   <= 1'b0;
      req      <= 1'b0;
      pd_clear <= 1'b0;
    end else begin
      peak_q   <= peak && !pd_clear;
      pd_clear <= (req && ack) || (peak && !peak_q && ccfg.mask && !pd_clear);
      if (req && ack)                                  req <= 1'b0;
      else if (peak && !peak_q && !ccfg.mask && !pd_clear) req <= 1'b1;
    end
  end

  assign tp_inj = tp_pulse && ccfg.tp_en;

endmodule
