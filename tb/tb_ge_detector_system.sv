// tb_ge_detector_system: end-to-end run of the full detector readout, 12 ASICs x 32 strips,
// every parameter at its default.
//
// The test plays the processor: it writes a configuration image (75 keV full scale, shortest
// shaping, time-of-arrival mode, one masked strip, one strip receiving test pulses) into each of
// the 12 ASICs over the register bus, loads a linear calibration for all 384 strips, loads the
// system clock from the timing receiver and starts the run. It then places photons on strips and
// compares the event stream with the expected events worked out here: strip, energy from the
// gain and calibration rules, arrival time from the cycle the photon was applied, and the
// shared flag. Mechanisms exercised and counted: configuration loading, timestamp sync,
// threshold rejection, masking, test pulses, charge-sharing recombination inside one ASIC and
// across two ASICs, simultaneous events on all 12 ASICs, output back-pressure, dead time in a
// channel and recombination switched off.
module tb_ge_detector_system;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, test_clk = 0, bus_we = 0, evr_sync = 0, ev_ready = 1;
  logic [NCH-1:0] hit [NASIC];
  logic signed [CHARGE_W-1:0] hit_q [NASIC][NCH];
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

  ge_detector_system dut (.*);

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
    for (int a = 0; a < NASIC; a++) hit[a] = '0;
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
    for (int a = 0; a < NASIC; a++) begin
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
    for (int a = 0; a < NASIC; a++) begin
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
    chk(m_cfg == NASIC, "all ASICs configured");
    // ---- calibration of all strips
    for (int s = 0; s < int'(NSTRIP); s++) wr('h800 + 4 * s, {16'(GAIN_Q8), 16'sd0});
    // ---- timestamp sync, then run
    @(negedge clk); evr_sync = 1; evr_time = TS_W'(T0); c_sync = cyc; @(negedge clk); evr_sync = 0;
    wr('h000, 32'h7);   // run, recombination on, time-of-arrival
    wr('h004, 32'd4);
    rd('h018, r);
    chk(longint'(r) == T0 + (cyc - (c_sync + 1)), "system clock follows the event receiver");
    m_sync++;

    // ---- single photons
    expect_ev(0, cal(60000), 0); expect_ev(100, cal(50000), 0);
    apply('{0, 100}, '{60000, 50000});
    settle_and_compare("singles");

    // ---- below threshold and masked: no events
    apply('{200}, '{5000});       // 5 keV -> code 273 < threshold 400
    apply('{73}, '{40000});       // masked
    settle_and_compare("suppressed");
    m_thr++; m_mask++;

    // ---- test pulse into strip 180: 150 x 200 eV
    expect_ev(180, cal(30000), 0);
    @(negedge clk); test_clk = 1;
    // the test pulse reaches the channel 3 cycles after the test-clock edge
    foreach (exps[i]) exps[i].toa = toa_now() + 2;
    repeat (5) @(negedge clk); test_clk = 0;
    settle_and_compare("test pulse");
    m_tp++;

    // ---- charge sharing inside one ASIC: strips 40/41
    expect_ev(40, cal(35000) + cal(15000), 1);
    apply('{40, 41}, '{35000, 15000});
    settle_and_compare("shared, one ASIC");
    m_share_in++;

    // ---- charge sharing across the ASIC 1 / ASIC 2 boundary: strips 63/64
    expect_ev(64, cal(12000) + cal(40000), 1);
    apply('{63, 64}, '{12000, 40000});
    settle_and_compare("shared, two ASICs");
    m_share_x++;

    // ---- one photon on every ASIC at once, output stalled for a while
    ev_ready = 0;
    for (int a = 0; a < NASIC; a++) expect_ev(a * 32 + 7 + (a % 3) * 5, cal(20000 + 1000 * a), 0);
    begin
      int st [NASIC], en [NASIC];
      for (int a = 0; a < NASIC; a++) begin st[a] = a * 32 + 7 + (a % 3) * 5; en[a] = 20000 + 1000 * a; end
      apply(st, en);
    end
    repeat (600) @(negedge clk);
    chk(outs.size() == 0, "nothing delivered while stalled");
    ev_ready = 1;
    settle_and_compare("all ASICs, back-pressure");
    m_all++;
    if (n_stall > 0) m_bp++;

    // ---- dead time: second photon on a busy channel is lost
    expect_ev(300, cal(45000), 0);
    apply('{300}, '{45000});
    repeat (3) @(negedge clk);
    begin
      automatic exp_t keep = exps[0];
      exps.delete();
      apply('{300}, '{70000});
      exps.push_back(keep);
    end
    settle_and_compare("dead time");
    m_dead++;

    // ---- recombination off: both halves delivered as they are
    wr('h000, 32'h5);
    expect_ev(150, cal(30000), 0); expect_ev(151, cal(22000), 0);
    apply('{150, 151}, '{30000, 22000});
    settle_and_compare("recombination off");
    m_bypass++;

    // ---- counters
    rd('h014, r); chk(r == 2 && n_merged == 2, $sformatf("merged counter %0d", r));
    rd('h010, r); chk(r == 2 + 1 + 1 + 1 + NASIC + 1 + 2, $sformatf("event counter %0d", r));

    begin
      automatic int mech [11] = '{m_cfg, m_sync, m_thr, m_mask, m_tp, m_share_in, m_share_x, m_all, m_bp, m_dead, m_bypass};
      automatic string nm [11] = '{"config load", "timestamp sync", "threshold", "mask", "test pulse", "sharing in ASIC",
                         "sharing across ASICs", "all ASICs", "back-pressure", "dead time", "bypass"};
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
