// tb_workload_xpd_53kev: monochromatic diffraction on the 384-strip detector at 53 keV, with
// charge sharing.
//
// 600 photons of 53 keV land on random strips, one every 40 cycles. About 30 % of them share
// their charge between the struck strip and its right-hand neighbour, split at a random fraction
// between 0.2 and 0.8. The same photon list is played twice. With recombination on, every photon
// must give exactly one event in the 53 keV peak, and every shared one must be flagged. With it
// off, only the unshared photons reach the peak, and each shared photon leaves two partial
// events below it. That is the before/after comparison of the charge-sharing correction.
// Energies are checked exactly against the gain and calibration rules evaluated here.
module tb_workload_xpd_53kev;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, test_clk = 0, bus_we = 0, evr_sync = 0, ev_ready = 1;
  logic [NCH-1:0] hit [NASIC];
  logic signed [CHARGE_W-1:0] hit_q [NASIC][NCH];
  logic [11:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic [TS_W-1:0] evr_time = '0;
  logic ev_valid, merged;
  event_t ev;

  localparam int GAIN_Q8 = 4689;   // 75000 eV / 4095 ADU in 8.8
  localparam int NPH     = 600;
  localparam int E0      = 53000;

  int checks = 0, failures = 0;
  event_t outs [$];
  int ph_strip [NPH], ph_e1 [NPH];   // e1 = charge in the struck strip; rest in strip+1
  bit ph_shared [NPH];

  ge_detector_system dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && ev_valid && ev_ready) outs.push_back(ev);

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
    return (code * GAIN_Q8) / 256;
  endfunction

  task automatic play();
    for (int p = 0; p < NPH; p++) begin
      @(negedge clk);
      if (ph_shared[p]) begin
        hit[ph_strip[p] / 32][ph_strip[p] % 32] = 1; hit_q[ph_strip[p] / 32][ph_strip[p] % 32] = CHARGE_W'(ph_e1[p]);
        hit[(ph_strip[p] + 1) / 32][(ph_strip[p] + 1) % 32] = 1;
        hit_q[(ph_strip[p] + 1) / 32][(ph_strip[p] + 1) % 32] = CHARGE_W'(E0 - ph_e1[p]);
      end else begin
        hit[ph_strip[p] / 32][ph_strip[p] % 32] = 1; hit_q[ph_strip[p] / 32][ph_strip[p] % 32] = CHARGE_W'(E0);
      end
      @(negedge clk);
      for (int a = 0; a < NASIC; a++) hit[a] = '0;
      repeat (38) @(negedge clk);
    end
    repeat (1000) @(negedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    glob_cfg_t g;
    chan_cfg_t c;
    logic [CFG_BITS-1:0] img;
    logic [31:0] r;
    int nshared = 0, peak, low, flagged, bad;
    for (int a = 0; a < NASIC; a++) begin
      hit[a] = '0;
      for (int i = 0; i < NCH; i++) hit_q[a][i] = '0;
    end
    // photon list; a strip is not reused while it may still be busy
    for (int p = 0; p < NPH; p++) begin
      automatic bit ok;
      do begin
        ph_strip[p] = $urandom % (NSTRIP - 1);
        ok = 1;
        for (int q = (p > 8 ? p - 8 : 0); q < p; q++)
          if (ph_strip[q] >= ph_strip[p] - 2 && ph_strip[q] <= ph_strip[p] + 2) ok = 0;
      end while (!ok);
      ph_shared[p] = ($urandom % 10) < 3;
      ph_e1[p] = E0 * (20 + $urandom % 61) / 100;
      if (ph_shared[p]) nshared++;
    end
    repeat (3) @(negedge clk); rst_n = 1;
    g = '0; g.gain = 3; g.shaping = 0; g.thr = 100; g.tmode = TMODE_TOA;
    img = '0; img[CFG_BITS-1 -: GLOB_BITS] = g;
    c = '0; c.trim = 8;
    for (int i = 0; i < NCH; i++) img[i*CHAN_BITS +: CHAN_BITS] = c;
    for (int k = 0; k < 8; k++) wr('h040 + 4 * k, 32'(img >> (32 * k)));
    for (int a = 0; a < NASIC; a++) begin
      wr('h008, 32'(a));
      do rd('h00C, r); while (r[0]);
    end
    for (int s = 0; s < int'(NSTRIP); s++) wr('h800 + 4 * s, {16'(GAIN_Q8), 16'sd0});

    // ---- recombination on
    wr('h000, 32'h7);
    play();
    chk(outs.size() == NPH, $sformatf("recombined: %0d events for %0d photons", outs.size(), NPH));
    peak = 0; flagged = 0; bad = 0;
    foreach (outs[i]) begin
      if (outs[i].energy > ENERGY_W'(E0 - 500) && outs[i].energy < ENERGY_W'(E0 + 500)) peak++;
      if (outs[i].shared) flagged++;
    end
    for (int p = 0; p < NPH; p++) begin
      automatic int exp_e = ph_shared[p] ? cal(ph_e1[p]) + cal(E0 - ph_e1[p]) : cal(E0);
      automatic int exp_s = (ph_shared[p] && (E0 - ph_e1[p]) > ph_e1[p]) ? ph_strip[p] + 1 : ph_strip[p];
      automatic bit found = 0;
      foreach (outs[i]) if (int'(outs[i].strip) == exp_s && int'(outs[i].energy) == exp_e && outs[i].shared == ph_shared[p]) found = 1;
      if (!found) bad++;
    end
    chk(bad == 0, $sformatf("%0d photons without their exact event", bad));
    chk(peak == NPH && flagged == nshared, $sformatf("53 keV peak %0d of %0d, shared %0d of %0d", peak, NPH, flagged, nshared));
    $display("recombination on : %0d events, %0d in the 53 keV peak, %0d recombined", outs.size(), peak, flagged);
    outs.delete();

    // ---- recombination off
    wr('h000, 32'h5);
    play();
    peak = 0; low = 0;
    foreach (outs[i]) begin
      if (outs[i].energy > ENERGY_W'(E0 - 500) && outs[i].energy < ENERGY_W'(E0 + 500)) peak++;
      else if (outs[i].energy < ENERGY_W'(E0 - 500)) low++;
    end
    chk(outs.size() == NPH + nshared, $sformatf("uncorrected: %0d events", outs.size()));
    chk(peak == NPH - nshared && low == 2 * nshared, $sformatf("uncorrected peak %0d, partials %0d", peak, low));
    $display("recombination off: %0d events, %0d in the 53 keV peak, %0d partial", outs.size(), peak, low);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
