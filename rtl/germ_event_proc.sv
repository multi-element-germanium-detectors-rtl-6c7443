// germ_event_proc: turns raw ASIC readings into calibrated, time-stamped strip events.
//
// Each raw event is given its strip number (ASIC number x 32 + channel), an energy in eV from a
// per-strip linear calibration, and a time of arrival. The calibration is a straight line
// through two known lines of a reference source, so each strip has a gain and an offset:
//     energy = (amp * gain) / 256 + offset        (gain: eV per ADC unit in 8.8 fixed point,
//                                                   offset: signed eV; negative results give 0)
// The table of NSTRIP entries is written through the cal_* port. In time-of-arrival mode
// (`tmode` = TMODE_TOA) the TAC output measured the interval between peak detection and readout,
// so the arrival time is the readout timestamp minus that interval:
//     toa = ts - (tdo << TAC_SHIFT)
// In time-over-threshold mode the readout timestamp is passed on. One register stage with a
// valid/ready handshake. Per-strip two-point linear calibration and the time reconstruction
// follow the detector description; the fixed-point formats and TAC_SHIFT (TAC units per clock
// cycle) are this design's.
module germ_event_proc
  import mars_pkg::*;
#(
  parameter int unsigned TAC_SHIFT = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  tmode_e             tmode,
  // calibration table write port
  input  logic               cal_we,
  input  logic [STRIP_W-1:0] cal_addr,
  input  logic [15:0]        cal_gain,
  input  logic signed [15:0] cal_off,
  // raw events in
  input  logic               in_valid,
  output logic               in_ready,
  input  raw_event_t         in_ev,
  // calibrated events out
  output logic               out_valid,
  input  logic               out_ready,
  output event_t             out_ev
);

  typedef struct packed {
    logic [15:0]        gain;
    logic signed [15:0] off;
  } cal_t;

  cal_t cal [NSTRIP];

  always_ff @(posedge clk)
    if (cal_we && int'(cal_addr) < int'(NSTRIP)) cal[cal_addr] <= '{gain: cal_gain, off: cal_off};

  logic [STRIP_W-1:0]          strip;
  cal_t                        c;
  logic signed [LEVEL_W+17:0]  e;      // amp*gain/256 + off, with sign
  logic [TS_W-1:0]             toa;
  logic [LEVEL_W+15:0]         prod;

  always_comb begin
    strip = STRIP_W'(in_ev.asic) * STRIP_W'(NCH) + STRIP_W'(in_ev.chan);
    c     = (int'(strip) < int'(NSTRIP)) ? cal[strip] : '0;
    prod  = (LEVEL_W+16)'(in_ev.amp) * (LEVEL_W+16)'(c.gain);
    e     = $signed({2'b00, 8'h00, prod[LEVEL_W+15:8]}) + (LEVEL_W+18)'(c.off);
    toa   = (tmode == TMODE_TOA) ? in_ev.ts - (TS_W'(in_ev.tdo) << TAC_SHIFT) : in_ev.ts;
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_ev    <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_ev.strip  <= strip;
        out_ev.energy <= (e < 0) ? '0 : (e > (LEVEL_W+18)'((1 << ENERGY_W) - 1)) ? '1 : ENERGY_W'(e);
        out_ev.toa    <= toa;
        out_ev.shared <= 1'b0;
      end
    end
  end

endmodule
