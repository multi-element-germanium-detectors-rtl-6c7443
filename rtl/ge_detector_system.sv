// ge_detector_system: a complete multi-strip germanium detector readout, 12 ASICs by 32 strips.
//
// Twelve MARS ASICs (32 channels each, 384 strips in all) sit next to the sensor. Each ASIC's
// multiplexed amplitude and timing outputs are buffered through the vacuum wall and digitised by
// two ADCs, and its digital lines go to the FPGA readout logic (germ_readout), which delivers
// calibrated, time-stamped and charge-sharing-corrected events on `ev_*` for the network
// interface and is controlled by the processor over `bus_*`. The analog buffers are wires here.
// The sensor is represented by `hit`/`hit_q`: a one-cycle pulse and the energy (eV, signed by
// carrier polarity) deposited in strip 32*a + c of ASIC a. The structure (12 ASICs, one ADC pair
// and one set of digital lines per ASIC, one FPGA) follows the system block diagram. The ASICs
// share the clock and the configuration data line; that is this design's choice. FS_EV selects
// the chip variant: the default is MARS (12.5-75 keV full scale); HE-MARS, identical except for
// a lower gain, is obtained with full scales up to 200 keV (the two middle values are assumed).
module ge_detector_system
  import mars_pkg::*;
#(
  // full scale of the four gain settings, eV: MARS by default; HE-MARS covers 25-200 keV
  parameter int unsigned FS_EV [4] = '{12500, 25000, 50000, 75000}
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       test_clk,
  input  logic [NCH-1:0]             hit   [NASIC],
  input  logic signed [CHARGE_W-1:0] hit_q [NASIC][NCH],
  input  logic [11:0]                bus_addr,
  input  logic [31:0]                bus_wdata,
  input  logic                       bus_we,
  output logic [31:0]                bus_rdata,
  input  logic                       evr_sync,
  input  logic [TS_W-1:0]            evr_time,
  output logic                       ev_valid,
  input  logic                       ev_ready,
  output event_t                     ev,
  output logic                       merged
);

  logic [NASIC-1:0]   flag, cs, rw, enable, adc_start, amp_valid, tim_valid, cfg_dout;
  logic [ADDR_W-1:0]  addr     [NASIC];
  logic [LEVEL_W-1:0] amp_out  [NASIC];
  logic [LEVEL_W-1:0] time_out [NASIC];
  logic [LEVEL_W-1:0] amp_data [NASIC];
  logic [LEVEL_W-1:0] tim_data [NASIC];
  logic               cfg_data;

  for (genvar a = 0; a < NASIC; a++) begin : g_asic
    mars_asic #(.FS_EV(FS_EV)) u_asic (
      .clk, .rst_n, .cs(cs[a]), .rw(rw[a]), .enable(enable[a]), .cfg_data,
      .cfg_dout(cfg_dout[a]), .test_clk, .flag(flag[a]), .addr(addr[a]),
      .hit(hit[a]), .hit_q(hit_q[a]), .amp_out(amp_out[a]), .time_out(time_out[a])
    );
    adc_model u_adc_amp (
      .clk, .rst_n, .start(adc_start[a]), .ain(amp_out[a]), .dout(amp_data[a]), .valid(amp_valid[a])
    );
    adc_model u_adc_tim (
      .clk, .rst_n, .start(adc_start[a]), .ain(time_out[a]), .dout(tim_data[a]), .valid(tim_valid[a])
    );
  end

  germ_readout u_fpga (
    .clk, .rst_n, .bus_addr, .bus_wdata, .bus_we, .bus_rdata, .evr_sync, .evr_time,
    .asic_flag(flag), .asic_addr(addr), .asic_cs(cs), .asic_rw(rw), .asic_enable(enable),
    .asic_cfg_data(cfg_data), .adc_start, .amp_valid, .amp_data, .tim_valid, .tim_data,
    .ev_valid, .ev_ready, .ev, .merged
  );

endmodule
