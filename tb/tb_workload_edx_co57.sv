// tb_workload_edx_co57: energy calibration of the 192-strip EDX detector with a 57Co source.
//
// The 192-strip detector uses every other ASIC position (ASICs 0, 2, ..., 10) of the 384-strip
// board, and HE-MARS chips (full scale up to 200 keV) so that the 122 and 136 keV gamma lines fit.
// Step 1: with an identity calibration, every populated strip sees a 14.4 keV and a 122 keV
// photon, and the raw ADC positions of the two lines are recorded per strip. Step 2: a two-point
// straight line is computed here for each strip and written into the calibration table.
// Step 3: every strip sees a 136 keV photon, which must come out at 136 keV within 0.2 keV, and a
// 14.4 keV photon, which must come out at 14.4 keV within the same margin. Recombination is off.
module tb_workload_edx_co57;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, test_clk = 0, bus_we = 0, evr_sync = 0, ev_ready = 1;
  logic [NCH-1:0] hit [NASIC];
  logic signed [CHARGE_W-1:0] hit_q [NASIC][NCH];
  logic [11:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic [TS_W-1:0] evr_time = '0;
  logic ev_valid, merged;
  event_t ev;
  int checks = 0, failures = 0;
  event_t outs [$];
  int raw14 [NSTRIP], raw122 [NSTRIP];

  ge_detector_system #(.FS_EV('{25000, 50000, 100000, 200000})) dut (.*);

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

  function automatic bit populated(int s); return ((s / 32) % 2) == 0; endfunction

  // one photon of energy e_ev on every populated strip, then collect the events
  task automatic flash(int e_ev);
    @(negedge clk);
    for (int s = 0; s < int'(NSTRIP); s++)
      if (populated(s)) begin hit[s / 32][s % 32] = 1'b1; hit_q[s / 32][s % 32] = CHARGE_W'(e_ev); end
    @(negedge clk);
    for (int a = 0; a < NASIC; a++) hit[a] = '0;
    repeat (1200) @(negedge clk);
    chk(outs.size() == int'(NSTRIP) / 2, $sformatf("%0d eV: %0d events from 192 strips", e_ev, outs.size()));
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
    for (int a = 0; a < NASIC; a++) begin
      hit[a] = '0;
      for (int i = 0; i < NCH; i++) hit_q[a][i] = '0;
    end
    repeat (3) @(negedge clk); rst_n = 1;
    // 200 keV full scale, threshold about 4 keV, time of arrival
    g = '0; g.gain = 3; g.shaping = 1; g.thr = 20; g.tmode = TMODE_TOA;
    img = '0; img[CFG_BITS-1 -: GLOB_BITS] = g;
    c = '0; c.trim = 8;
    for (int i = 0; i < NCH; i++) img[i*CHAN_BITS +: CHAN_BITS] = c;
    for (int k = 0; k < 8; k++) wr('h040 + 4 * k, 32'(img >> (32 * k)));
    for (int a = 0; a < NASIC; a += 2) begin
      wr('h008, 32'(a));
      do rd('h00C, r); while (r[0]);
    end
    // identity calibration: energy = ADC code
    for (int s = 0; s < int'(NSTRIP); s++) wr('h800 + 4 * s, {16'd256, 16'sd0});
    wr('h000, 32'h5);   // run, recombination off, time of arrival

    flash(14400);
    foreach (outs[i]) raw14[outs[i].strip] = int'(outs[i].energy);
    outs.delete();
    flash(122000);
    foreach (outs[i]) raw122[outs[i].strip] = int'(outs[i].energy);
    outs.delete();

    // two-point calibration per strip
    for (int s = 0; s < int'(NSTRIP); s++)
      if (populated(s)) begin
        automatic int gq = ((122000 - 14400) * 256) / (raw122[s] - raw14[s]);
        automatic int off = 14400 - (raw14[s] * gq) / 256;
        wr('h800 + 4 * s, {16'(gq), 16'(off)});
      end

    flash(136000);
    foreach (outs[i]) begin
      automatic int e = int'(outs[i].energy);
      chk(populated(int'(outs[i].strip)) && e > 135800 && e < 136200,
          $sformatf("136 keV line on strip %0d at %0d eV", outs[i].strip, e));
    end
    outs.delete();
    flash(14400);
    foreach (outs[i]) begin
      automatic int e = int'(outs[i].energy);
      chk(e > 14200 && e < 14600, $sformatf("14.4 keV line on strip %0d at %0d eV", outs[i].strip, e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
