// mars_asic: one MARS readout ASIC, 32 channels behind a single amplitude and timing output.
//
// Each channel (analog model plus its control logic) captures the peak amplitude of a photon
// above threshold and holds it. The global logic selects one waiting channel at a time, shows
// it on `flag`/`addr`, and steers the output multiplexer so that `amp_out` carries that channel's
// peak-detector output and `time_out` its time-to-analog converter output. The readout system
// digitises both and acknowledges with `enable` (cs=1, rw=0), which frees the channel. With
// cs=1 and rw=1, each `enable` cycle shifts one bit of `cfg_data` into the configuration
// register. A rising edge on `test_clk` injects the test charge into channels whose tp_en is
// set. The block structure (configuration register, test-pulse generator, 32 channels, global
// logic, amplitude/timing multiplexer) follows the chip block diagram; `amp_out` and `time_out`
// are analog in the chip and are LEVEL_W-bit codes here. The analog monitor and bias circuits
// have no model. FS_EV sets the full scale of the four gains: MARS by default, HE-MARS (the
// same chip with lower gain, up to 200 keV) by overriding it.
module mars_asic
  import mars_pkg::*;
#(
  // full scale of the four gain settings, eV: MARS by default; HE-MARS covers 25-200 keV
  parameter int unsigned FS_EV [4] = '{12500, 25000, 50000, 75000}
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // differential digital interface
  input  logic                       cs,
  input  logic                       rw,
  input  logic                       enable,
  input  logic                       cfg_data,
  output logic                       cfg_dout,
  input  logic                       test_clk,
  output logic                       flag,
  output logic [ADDR_W-1:0]          addr,
  // anode inputs: deposited energy per channel, eV, signed by carrier polarity
  input  logic [NCH-1:0]             hit,
  input  logic signed [CHARGE_W-1:0] hit_q [NCH],
  // multiplexed analog outputs
  output logic [LEVEL_W-1:0]         amp_out,
  output logic [LEVEL_W-1:0]         time_out
);

  glob_cfg_t gcfg;
  chan_cfg_t ccfg [NCH];
  logic      cfg_shift;
  logic      tp_pulse;
  logic signed [CHARGE_W-1:0] tp_charge;
  logic [NCH-1:0] peak, req, ack, pd_clear, tp_inj;
  logic [LEVEL_W-1:0] pdo [NCH];
  logic [LEVEL_W-1:0] tdo [NCH];
  logic [ADDR_W-1:0]  sel;

  mars_config_reg u_cfg (
    .clk, .rst_n, .shift_en(cfg_shift), .cfg_din(cfg_data), .cfg_dout, .gcfg, .ccfg
  );

  mars_test_pulse u_tp (
    .clk, .rst_n, .test_clk, .tp_amp(gcfg.tp_amp), .polarity(gcfg.polarity), .tp_pulse, .tp_charge
  );

  for (genvar i = 0; i < NCH; i++) begin : g_ch
    mars_channel_analog #(.FS_EV(FS_EV)) u_ana (
      .clk, .rst_n, .gcfg, .ccfg(ccfg[i]), .hit(hit[i]), .hit_q(hit_q[i]),
      .inj(tp_inj[i]), .inj_q(tp_charge), .pd_clear(pd_clear[i]),
      .peak(peak[i]), .pdo(pdo[i]), .tdo(tdo[i])
    );
    mars_channel_logic u_log (
      .clk, .rst_n, .ccfg(ccfg[i]), .peak(peak[i]), .ack(ack[i]), .tp_pulse,
      .req(req[i]), .pd_clear(pd_clear[i]), .tp_inj(tp_inj[i])
    );
  end

  mars_global_logic u_glob (
    .clk, .rst_n, .cs, .rw, .enable, .req, .flag, .addr, .sel, .ack, .cfg_shift
  );

  // output multiplexer
  assign amp_out  = pdo[sel];
  assign time_out = tdo[sel];

endmodule
