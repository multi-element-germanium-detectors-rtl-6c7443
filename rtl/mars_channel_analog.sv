// mars_channel_analog: behavioural model of the analog part of one MARS channel.
//
// This is not synthesizable circuitry in the real chip: it stands for the charge-sensitive
// preamplifier stages, the shaping amplifier, the trimmed threshold discriminator, the two-phase
// peak detector and the time-to-analog converter (TAC). Analog levels are represented as
// LEVEL_W-bit codes, the way the ADC behind the chip would see them.
//
// A photon is given as a one-cycle `hit` with its deposited energy in eV (signed: the sign is
// the carrier polarity). Test-pulse charge arriving on `inj` adds to it. The channel accepts
// charge of the sign selected by the polarity bit, scales it by the selected gain (full scale
// FS_EV[gain]) and compares the result with the threshold: the global DAC value (times four, to
// reach LEVEL_W bits) shifted by the per-channel trim. Below threshold nothing happens. Above it,
// the peak detector captures the amplitude after the peaking time PEAK_CYC[shaping] and raises
// `peak`, holding the value on `pdo` until `pd_clear`. While a value is held or a pulse is being
// shaped, further photons are lost (dead time). The TAC output `tdo` either counts clock cycles
// from the peak capture to the readout (time-of-arrival mode), or holds the time the shaped
// pulse spent over threshold (time-over-threshold mode), modelled as a triangular pulse rising
// in one peaking time and falling in two.
//
// The four gains, the four shaping times from 0.25 us to 2 us, the global+trim threshold, the
// peak detector as temporary storage and the two TAC modes follow the chip description. The
// intermediate gain and shaping values, the 50 MHz time base behind PEAK_CYC, the pulse shape
// and the dead-time behaviour are this model's choices.
module mars_channel_analog
  import mars_pkg::*;
#(
  parameter int unsigned FS_EV    [4] = '{12500, 25000, 50000, 75000},
  parameter int unsigned PEAK_CYC [4] = '{12, 25, 50, 100},
  parameter int unsigned TRIM_STEP    = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  glob_cfg_t                  gcfg,
  input  chan_cfg_t                  ccfg,
  input  logic                       hit,
  input  logic signed [CHARGE_W-1:0] hit_q,
  input  logic                       inj,
  input  logic signed [CHARGE_W-1:0] inj_q,
  input  logic                       pd_clear,
  output logic                       peak,
  output logic [LEVEL_W-1:0]         pdo,
  output logic [LEVEL_W-1:0]         tdo
);

  localparam int unsigned LMAX = (1 << LEVEL_W) - 1;

  typedef enum logic [1:0] { S_IDLE, S_SHAPE, S_HOLD } state_e;
  state_e            state;
  logic [7:0]        cnt;
  logic [LEVEL_W-1:0] amp_q, tot_q, tac;

  // amplitude code and threshold for the charge arriving this cycle
  int  q, a, thr;
  longint code;
  always_comb begin
    q = 0;
    if (hit) q += int'(hit_q);
    if (inj) q += int'(inj_q);
    a = gcfg.polarity ? -q : q;
    code = (a <= 0) ? 0 : (longint'(a) * longint'(LMAX)) / longint'(FS_EV[gcfg.gain]);
    if (code > longint'(LMAX)) code = longint'(LMAX);
    thr = int'(gcfg.thr) * 4 + (int'(ccfg.trim) - 8) * int'(TRIM_STEP);
    if (thr < 0) thr = 0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      amp_q <= '0;
      tot_q <= '0;
      tac   <= '0;
    end else begin
      case (state)
        S_IDLE:
          if ((hit || inj) && code > longint'(thr)) begin
            state <= S_SHAPE;
            cnt   <= 8'(PEAK_CYC[gcfg.shaping] - 1);
            amp_q <= LEVEL_W'(code);
            tot_q <= LEVEL_W'((3 * longint'(PEAK_CYC[gcfg.shaping]) * (code - longint'(thr))) / code);
          end
        S_SHAPE:
          if (cnt == 0) begin
            state <= S_HOLD;
            tac   <= '0;
          end else cnt <= cnt - 1'b1;
        S_HOLD: begin
          if (tac != LEVEL_W'(LMAX)) tac <= tac + 1'b1;
          if (pd_clear) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign peak = (state == S_HOLD);
  assign pdo  = peak ? amp_q : '0;
  assign tdo  = !peak ? '0 : (gcfg.tmode == TMODE_TOA) ? tac : tot_q;

endmodule
