// mars_pkg: constants and types shared by the MARS ASIC model and the GeRM readout firmware.
//
// The MARS ASIC has 32 channels, four gains and four shaping times (two bits each), a global
// threshold plus a per-channel trim, and a timing system that measures either time over
// threshold or time of arrival. Those counts follow the detector description. The bit widths of
// the threshold DAC, the trim, the test-pulse DAC, the ADC and the timestamp are not published
// and are this design's own choices; they are collected here so they can be changed in one place.
// The configuration image is global_cfg_t followed by NCH copies of chan_cfg_t, channel 31
// first, shifted in most-significant bit first.
package mars_pkg;

  localparam int unsigned NCH       = 32;   // channels per ASIC
  localparam int unsigned NASIC     = 12;   // ASICs per readout module
  localparam int unsigned ADDR_W    = $clog2(NCH);
  localparam int unsigned ASIC_W    = 4;
  localparam int unsigned STRIP_W   = 9;    // 12 x 32 = 384 strips
  localparam int unsigned NSTRIP    = NASIC * NCH;
  localparam int unsigned LEVEL_W   = 12;   // analog level / ADC resolution
  localparam int unsigned THR_W     = 10;   // global threshold DAC
  localparam int unsigned TRIM_W    = 4;    // per-channel trim DAC
  localparam int unsigned TPDAC_W   = 10;   // test-pulse amplitude DAC
  localparam int unsigned TS_W      = 48;   // system clock timestamp
  localparam int unsigned CHARGE_W  = 21;   // signed deposited energy, eV
  localparam int unsigned ENERGY_W  = 20;   // calibrated energy, eV

  typedef enum logic { TMODE_TOT = 1'b0, TMODE_TOA = 1'b1 } tmode_e;

  // chip-wide settings
  typedef struct packed {
    logic [1:0]         gain;      // 0: most sensitive (12.5 keV full scale) .. 3: 75 keV
    logic [1:0]         shaping;   // 0: 0.25 us .. 3: 2 us
    logic               polarity;  // 0: positive charge signals, 1: negative
    tmode_e             tmode;     // timing system: time over threshold or time of arrival
    logic [THR_W-1:0]   thr;       // global threshold DAC
    logic [TPDAC_W-1:0] tp_amp;    // test-pulse amplitude DAC
  } glob_cfg_t;

  // per-channel settings
  typedef struct packed {
    logic [TRIM_W-1:0] trim;       // threshold trim, offset binary (8 = no shift)
    logic              mask;       // 1: channel never requests readout
    logic              tp_en;      // 1: channel receives test pulses
    logic              mon_en;     // 1: channel drives the analog monitor
  } chan_cfg_t;

  localparam int unsigned GLOB_BITS = $bits(glob_cfg_t);
  localparam int unsigned CHAN_BITS = $bits(chan_cfg_t);
  localparam int unsigned CFG_BITS  = GLOB_BITS + NCH * CHAN_BITS;

  // one event as read from an ASIC by the readout firmware
  typedef struct packed {
    logic [ASIC_W-1:0]  asic;
    logic [ADDR_W-1:0]  chan;
    logic [LEVEL_W-1:0] amp;       // digitised peak amplitude
    logic [LEVEL_W-1:0] tdo;       // digitised time-to-analog converter output
    logic [TS_W-1:0]    ts;        // system clock at readout
  } raw_event_t;

  // one event after calibration and time reconstruction
  typedef struct packed {
    logic [STRIP_W-1:0]  strip;
    logic [ENERGY_W-1:0] energy;   // eV
    logic [TS_W-1:0]     toa;      // reconstructed time of arrival (system clock cycles)
    logic                shared;   // 1: sum of a two-strip charge-shared pair
  } event_t;

endpackage
