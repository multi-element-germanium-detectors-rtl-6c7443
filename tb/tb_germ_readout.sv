// tb_germ_readout: the FPGA readout logic with two ASICs and their ADCs attached.
//
// Same method as the full-system test, on a two-ASIC (64-strip) setup: configuration over the
// register bus, calibration, timestamp sync, then photons whose events are compared with values
// computed here. Covers single events, charge sharing across the two ASICs, back-pressure,
// recombination switched off and the event and pair counters.
module tb_germ_readout;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, test_clk = 0, bus_we = 0, evr_sync = 0, ev_ready = 1;
  logic [NCH-1:0] hit [2];
  logic signed [CHARGE_W-1:0] hit_q [2][NCH];
  logic [11:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic [TS_W-1:0] evr_time = '0;
  logic ev_valid, merged;
  event_t ev;

  localparam int GAIN_Q8 = 4689;     // 75000 eV / 4095 ADU in 8.8 fixed point
  localparam int PK      = 12;       // peaking time of shaping setting 0, cycles
  localparam longint T0  = 64'd5_000_000;

  int checks = 0, failures = 0;
  longint cyc = 0, c_sync = 0;
  event_t outs [$];
  int n_stall = 0, n_merged = 0;
  // mechanism counters
  int m_cfg = 0, m_sync = 0, m_thr = 0, m_mask = 0, m_tp = 0, m_share_in = 0, m_share_x = 0,
      m_all = 0, m_bp = 0, m_dead = 0, m_bypass = 0;

  localparam int NA = 2;
  logic [NA-1:0]      flag, cs, rw, enable, adc_start, amp_valid, tim_valid, cfg_dout;
  logic [ADDR_W-1:0]  addr     [NA];
  logic [LEVEL_W-1:0] amp_out  [NA], time_out [NA], amp_data [NA], tim_data [NA];
  logic               cfg_data;
  for (genvar a = 0; a < NA; a++) begin : g_asic
    mars_asic u_asic (
      .clk, .rst_n, .cs(cs[a]), .rw(rw[a]), .enable(enable[a]), .cfg_data,
      .cfg_dout(cfg_dout[a]), .test_clk, .flag(flag[a]), .addr(addr[a]),
      .hit(hit[a]), .hit_q(hit_q[a]), .amp_out(amp_out[a]), .time_out(time_out[a])
    );
    adc_model u_adc_amp (.clk, .rst_n, .start(adc_start[a]), .ain(amp_out[a]), .dout(amp_data[a]), .valid(amp_valid[a]));
    adc_model u_adc_tim (.clk, .rst_n, .start(adc_start[a]), .ain(time_out[a]), .dout(tim_data[a]), .valid(tim_valid[a]));
  end
  germ_readout #(.N_ASIC(NA)) dut (
    .clk, .rst_n, .bus_addr, .bus_wdata, .bus_we, .bus_rdata, .evr_sync, .evr_time,
    .asic_flag(flag), .asic_addr(addr), .asic_cs(cs), .asic_rw(rw), .asic_enable(enable),
    .asic_cfg_data(cfg_data), .adc_start, .amp_valid, .amp_data, .tim_valid, .tim_data,
    .ev_valid, .ev_ready, .ev, .merged
  );

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && ev_valid && ev_ready) outs.push_back(ev);
    if (rst_n && ev_valid && !ev_ready) n_stall++;
    if (rst_n && merged) n_merged++;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(int a, logic [31:0] d);
    @(negedge clk); bus_addr = 12'(a); bus_wdata = d; bus_we = 1; @(negedge clk); bus_we = 0;
  endtask
  task automatic rd(int a, output logic [31:0] v);
    @(negedge clk); bus_addr = 12'(a); #1 v = bus_rdata;
  endtask

  function automatic int cal(int e_ev);
    int code = (e_ev * 4095) / 75000;
    if (code > 4095) code = 4095;
    return (code * GAIN_Q8) / 256;
  endfunction

  // photon arrival time as the system clock will report it, for a hit applied now
  function automatic longint toa_now();
    return T0 + (cyc - (c_sync + 1)) + 1 + PK;
  endfunction

  typedef struct { int strip; int energy; longint toa; bit shared; } exp_t;
  exp_t exps [$];

  task automatic apply(int strip[], int e_ev[]);
    longint t;
    @(negedge clk);
    t = toa_now();
    foreach (strip[i]) begin
      hit[strip[i] / 32][strip[i] % 32] = 1'b1;
      hit_q[strip[i] / 32][strip[i] % 32] = CHARGE_W'(e_ev[i]);
    end
    @(negedge clk);
    for (int a = 0; a < NA; a++) hit[a] = '0;
    // record the arrival time for the expectations added next
    foreach (exps[i]) if (exps[i].toa < 0) exps[i].toa = t;
  endtask

  function automatic void expect_ev(int strip, int energy, bit shared);
    exps.push_back('{strip, energy, -1, shared});
  endfunction

  // wait until the stream has settled, then compare outputs with expectations (any order)
  task automatic settle_and_compare(string what);
    repeat (800) @(negedge clk);
    chk(outs.size() == exps.size(), $sformatf("%s: %0d events, expected %0d", what, outs.size(), exps.size()));
    foreach (exps[i]) begin
      automatic bit found = 0;
      foreach (outs[j])
        if (!found && int'(outs[j].strip) == exps[i].strip) begin
          found = 1;
          chk(int'(outs[j].energy) == exps[i].energy,
              $sformatf("%s strip %0d energy %0d expected %0d", what, exps[i].strip, outs[j].energy, exps[i].energy));
          chk(longint'(outs[j].toa) == exps[i].toa,
              $sformatf("%s strip %0d toa %0d expected %0d", what, exps[i].strip, outs[j].toa, exps[i].toa));
          chk(outs[j].shared == exps[i].shared, $sformatf("%s strip %0d shared flag", what, exps[i].strip));
        end
      chk(found, $sformatf("%s: event on strip %0d missing", what, exps[i].strip));
    end
    outs.delete(); exps.delete();
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    glob_cfg_t g;
    chan_cfg_t c;
    logic [CFG_BITS-1:0] img;
    logic [31:0] r;
    int n;
    for (int a = 0; a < NA; a++) begin
      hit[a] = '0;
      for (int i = 0; i < NCH; i++) hit_q[a][i] = '0;
    end
    repeat (3) @(negedge clk); rst_n = 1;

    // ---- configuration of all ASICs
    g = '0; g.gain = 3; g.shaping = 0; g.thr = 100; g.tmode = TMODE_TOA; g.tp_amp = 150;
    img = '0;
    img[CFG_BITS-1 -: GLOB_BITS] = g;
    for (int i = 0; i < NCH; i++) begin
      c = '0; c.trim = 8; c.mask = 0; c.tp_en = 0;
      img[i*CHAN_BITS +: CHAN_BITS] = c;
    end
    for (int a = 0; a < NA; a++) begin
      automatic logic [CFG_BITS-1:0] im = img;
      // strip 73 (ASIC 2, channel 9) masked; strip 180 (ASIC 5, channel 20) gets test pulses
      if (a == 2) im[9*CHAN_BITS +: CHAN_BITS] = chan_cfg_t'{trim: 8, mask: 1, tp_en: 0, mon_en: 0};
      if (a == 5) im[20*CHAN_BITS +: CHAN_BITS] = chan_cfg_t'{trim: 8, mask: 0, tp_en: 1, mon_en: 0};
      for (int k = 0; k < 8; k++) wr('h040 + 4 * k, 32'(im >> (32 * k)));
      wr('h008, 32'(a));
      n = 0;
      do begin rd('h00C, r); n++; end while (r[0] && n < 1000);
      if (!r[0]) m_cfg++;
    end
    chk(m_cfg == NA, "all ASICs configured");
    // ---- calibration of all strips
    for (int s = 0; s < NA * 32; s++) wr('h800 + 4 * s, {16'(GAIN_Q8), 16'sd0});
    // ---- timestamp sync, then run
    @(negedge clk); evr_sync = 1; evr_time = TS_W'(T0); c_sync = cyc; @(negedge clk); evr_sync = 0;
    wr('h000, 32'h7);   // run, recombination on, time-of-arrival
    wr('h004, 32'd4);
    rd('h018, r);
    chk(longint'(r) == T0 + (cyc - (c_sync + 1)), "system clock follows the event receiver");
    m_sync++;

    // ---- single photons
    expect_ev(0, cal(60000), 0); expect_ev(45, cal(50000), 0);
    apply('{0, 45}, '{60000, 50000});
    settle_and_compare("singles");
    // ---- charge sharing across the two ASICs: strips 31/32, output stalled meanwhile
    ev_ready = 0;
    expect_ev(31, cal(41000) + cal(9000), 1);
    apply('{31, 32}, '{41000, 9000});
    repeat (500) @(negedge clk);
    chk(outs.size() == 0, "nothing delivered while stalled");
    ev_ready = 1;
    settle_and_compare("shared, two ASICs");
    m_share_x++;
    if (n_stall > 0) m_bp++;
    // ---- recombination off
    wr('h000, 32'h5);
    expect_ev(10, cal(30000), 0); expect_ev(11, cal(22000), 0);
    apply('{10, 11}, '{30000, 22000});
    settle_and_compare("recombination off");
    m_bypass++;
    rd('h014, r); chk(r == 1 && n_merged == 1, $sformatf("merged counter %0d", r));
    rd('h010, r); chk(r == 5, $sformatf("event counter %0d", r));
    begin
      automatic int mech [5] = '{m_cfg, m_sync, m_share_x, m_bp, m_bypass};
      automatic string nm [5] = '{"config load", "timestamp sync", "sharing across ASICs", "back-pressure", "bypass"};
      foreach (mech[i]) begin
        $display("mechanism %-22s happened %0d times", nm[i], mech[i]);
        chk(mech[i] > 0, $sformatf("mechanism %s never happened", nm[i]));
      end
      $display("output stall cycles %0d", n_stall);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
