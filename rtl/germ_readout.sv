// germ_readout: the FPGA readout and control logic for up to twelve MARS ASICs.
//
// One sequencer per ASIC (germ_asic_readout) waits for the chip's flag, has its two ADCs
// digitise the amplitude and timing outputs, time-stamps the reading with the system clock and
// acknowledges it. The per-ASIC streams are merged into one FIFO (germ_event_merge), calibrated
// per strip with the arrival time reconstructed (germ_event_proc), and passed through the
// charge-sharing recombination (charge_share_combiner) to the event output, which feeds the
// network interface. The system clock (germ_timestamp) can be loaded from the facility timing
// event receiver. The processor controls everything through memory-mapped registers
// (germ_regs), including loading configuration images into the ASICs (germ_cfg_loader), which
// share one configuration data line and are told apart by their chip selects. Software should
// clear `run` before loading a configuration; while a load is in progress readout is paused.
// The partition into readout/control logic, event interface, event receiver and processor
// follows the system block diagram; the internal pipeline is this design's.
module germ_readout
  import mars_pkg::*;
#(
  parameter int unsigned N_ASIC     = NASIC,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned NSLOT      = 4,
  parameter int unsigned HOLD_CYC   = 256,
  parameter int unsigned SETTLE_CYC = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  // processor bus
  input  logic [11:0]        bus_addr,
  input  logic [31:0]        bus_wdata,
  input  logic               bus_we,
  output logic [31:0]        bus_rdata,
  // timing event receiver
  input  logic               evr_sync,
  input  logic [TS_W-1:0]    evr_time,
  // ASIC digital interfaces
  input  logic [N_ASIC-1:0]  asic_flag,
  input  logic [ADDR_W-1:0]  asic_addr [N_ASIC],
  output logic [N_ASIC-1:0]  asic_cs,
  output logic [N_ASIC-1:0]  asic_rw,
  output logic [N_ASIC-1:0]  asic_enable,
  output logic               asic_cfg_data,
  // ADCs, two per ASIC (amplitude and timing), started together
  output logic [N_ASIC-1:0]  adc_start,
  input  logic [N_ASIC-1:0]  amp_valid,
  input  logic [LEVEL_W-1:0] amp_data [N_ASIC],
  input  logic [N_ASIC-1:0]  tim_valid,
  input  logic [LEVEL_W-1:0] tim_data [N_ASIC],
  // event output to the network interface
  output logic               ev_valid,
  input  logic               ev_ready,
  output event_t             ev,
  output logic               merged
);

  logic                run, share_en;
  tmode_e              tmode;
  logic [7:0]          window;
  logic                cfg_start, cfg_busy, cfg_done;
  logic [ASIC_W-1:0]   cfg_asic;
  logic [CFG_BITS-1:0] cfg_image;
  logic                cal_we;
  logic [STRIP_W-1:0]  cal_addr;
  logic [15:0]         cal_gain;
  logic signed [15:0]  cal_off;
  logic [TS_W-1:0]     ts;
  logic [31:0]         ev_count, merged_count;

  logic [N_ASIC-1:0]   ld_cs, rd_cs, rd_en;
  logic                ld_rw, ld_en;

  logic [N_ASIC-1:0]   r_valid, r_ready;
  raw_event_t          r_ev [N_ASIC];
  logic                m_valid, m_ready;
  raw_event_t          m_ev;
  logic [$clog2(FIFO_DEPTH):0] m_level;
  logic                p_valid, p_ready;
  event_t              p_ev;

  germ_regs u_regs (
    .clk, .rst_n, .addr(bus_addr), .wdata(bus_wdata), .we(bus_we), .rdata(bus_rdata),
    .run, .share_en, .tmode, .window, .cfg_start, .cfg_asic, .cfg_image,
    .cal_we, .cal_addr, .cal_gain, .cal_off,
    .cfg_busy, .fifo_level(8'(m_level)), .ev_count, .merged_count, .ts
  );

  germ_timestamp u_ts (.clk, .rst_n, .sync(evr_sync), .sync_time(evr_time), .ts);

  germ_cfg_loader #(.N(N_ASIC)) u_ld (
    .clk, .rst_n, .start(cfg_start), .asic_sel(cfg_asic), .image(cfg_image),
    .busy(cfg_busy), .done(cfg_done), .cs(ld_cs), .rw(ld_rw), .enable(ld_en),
    .cfg_data(asic_cfg_data)
  );

  for (genvar i = 0; i < N_ASIC; i++) begin : g_asic
    germ_asic_readout #(.SETTLE_CYC(SETTLE_CYC)) u_rd (
      .clk, .rst_n, .run(run && !cfg_busy), .asic_id(ASIC_W'(i)), .ts,
      .flag(asic_flag[i]), .addr(asic_addr[i]), .cs(rd_cs[i]), .enable(rd_en[i]),
      .adc_start(adc_start[i]), .amp_valid(amp_valid[i]), .amp_data(amp_data[i]),
      .tim_valid(tim_valid[i]), .tim_data(tim_data[i]),
      .ev_valid(r_valid[i]), .ev_ready(r_ready[i]), .ev(r_ev[i])
    );
    // the configuration loader owns a chip while it writes to it
    assign asic_cs[i]     = ld_cs[i] || rd_cs[i];
    assign asic_rw[i]     = ld_cs[i] && ld_rw;
    assign asic_enable[i] = ld_cs[i] ? ld_en : rd_en[i];
  end

  germ_event_merge #(.N(N_ASIC), .DEPTH(FIFO_DEPTH)) u_merge (
    .clk, .rst_n, .in_valid(r_valid), .in_ready(r_ready), .in_ev(r_ev),
    .out_valid(m_valid), .out_ready(m_ready), .out_ev(m_ev), .level(m_level)
  );

  germ_event_proc u_proc (
    .clk, .rst_n, .tmode, .cal_we, .cal_addr, .cal_gain, .cal_off,
    .in_valid(m_valid), .in_ready(m_ready), .in_ev(m_ev),
    .out_valid(p_valid), .out_ready(p_ready), .out_ev(p_ev)
  );

  charge_share_combiner #(.NSLOT(NSLOT), .HOLD_CYC(HOLD_CYC)) u_share (
    .clk, .rst_n, .en(share_en), .window,
    .in_valid(p_valid), .in_ready(p_ready), .in_ev(p_ev),
    .out_valid(ev_valid), .out_ready(ev_ready), .out_ev(ev), .merged
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ev_count     <= '0;
      merged_count <= '0;
    end else begin
      if (ev_valid && ev_ready) ev_count <= ev_count + 1'b1;
      if (merged)               merged_count <= merged_count + 1'b1;
    end
  end

endmodule
