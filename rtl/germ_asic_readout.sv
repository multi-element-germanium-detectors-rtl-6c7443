// germ_asic_readout: the readout sequencer the FPGA runs for one MARS ASIC.
//
// Events leave an ASIC one at a time through its amplitude and timing outputs. While `run` is
// high, the sequencer waits for the ASIC's `flag`, selects the chip (cs high, rw low) and waits
// SETTLE_CYC cycles for the multiplexed analog outputs to settle. It then latches the channel
// `addr` and the system clock `ts`, and starts both ADCs. When both conversions are back it
// offers the raw event (ASIC number, channel, amplitude, TAC value, timestamp) on `ev_*`; once
// it is taken, it pulses `enable` to tell the ASIC the event has been read, and waits GAP_CYC
// cycles for the ASIC to drop `flag` and choose its next channel.
// The time of arrival is later reconstructed from `ts` and the TAC value, since the TAC measures
// the interval from peak detection to this readout. That the DAQ reads events sequentially and
// records the system clock with each value follows the chip description; the handshake, the
// settle and gap times and the state sequence are this design's.
// Cycles per event with no back-pressure: 1 + SETTLE_CYC + 1 + ADC latency + 1 + 1 + GAP_CYC.
module germ_asic_readout
  import mars_pkg::*;
#(
  parameter int unsigned SETTLE_CYC = 4,
  parameter int unsigned GAP_CYC    = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               run,
  input  logic [ASIC_W-1:0]  asic_id,
  input  logic [TS_W-1:0]    ts,
  // ASIC digital interface
  input  logic               flag,
  input  logic [ADDR_W-1:0]  addr,
  output logic               cs,
  output logic               enable,
  // ADCs on the amplitude and timing outputs
  output logic               adc_start,
  input  logic               amp_valid,
  input  logic [LEVEL_W-1:0] amp_data,
  input  logic               tim_valid,
  input  logic [LEVEL_W-1:0] tim_data,
  // event stream
  output logic               ev_valid,
  input  logic               ev_ready,
  output raw_event_t         ev
);

  typedef enum logic [2:0] { S_IDLE, S_SETTLE, S_CONV, S_OUT, S_ACK, S_GAP } state_e;
  state_e     state;
  logic [7:0] cnt;
  logic       amp_got, tim_got;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cnt     <= '0;
      amp_got <= 1'b0;
      tim_got <= 1'b0;
      ev      <= '0;
    end else begin
      case (state)
        S_IDLE:
          if (run && flag) begin
            state <= S_SETTLE;
            cnt   <= 8'(SETTLE_CYC);
          end
        S_SETTLE:
          if (cnt <= 1) begin
            state   <= S_CONV;
            ev.asic <= asic_id;
            ev.chan <= addr;
            ev.ts   <= ts;
            amp_got <= 1'b0;
            tim_got <= 1'b0;
          end else cnt <= cnt - 1'b1;
        S_CONV: begin
          if (amp_valid) begin ev.amp <= amp_data; amp_got <= 1'b1; end
          if (tim_valid) begin ev.tdo <= tim_data; tim_got <= 1'b1; end
          if ((amp_got || amp_valid) && (tim_got || tim_valid)) state <= S_OUT;
        end
        S_OUT:
          if (ev_ready) state <= S_ACK;
        S_ACK: begin
          state <= S_GAP;
          cnt   <= 8'(GAP_CYC);
        end
        S_GAP:
          if (cnt <= 1) state <= S_IDLE;
          else cnt <= cnt - 1'b1;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign cs        = (state != S_IDLE) && (state != S_GAP);
  assign enable    = (state == S_ACK);
  assign ev_valid  = (state == S_OUT);
  // start both conversions on the cycle the address and timestamp are latched
  assign adc_start = (state == S_SETTLE) && (cnt <= 1);

endmodule
