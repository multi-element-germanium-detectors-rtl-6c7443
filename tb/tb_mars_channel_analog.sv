// tb_mars_channel_analog: checks the behavioural channel model.
// Gain, threshold with trim, polarity, peaking delay (in cycles), peak hold, dead time, clear,
// and both timing modes are compared with values computed here from the model's stated rules.
module tb_mars_channel_analog;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0;
  glob_cfg_t gcfg;
  chan_cfg_t ccfg;
  logic hit = 0, inj = 0, pd_clear = 0, peak;
  logic signed [CHARGE_W-1:0] hit_q = '0, inj_q = '0;
  logic [LEVEL_W-1:0] pdo, tdo;
  int checks = 0, failures = 0;
  localparam int FS [4] = '{12500, 25000, 50000, 75000};
  localparam int PK [4] = '{12, 25, 50, 100};

  mars_channel_analog dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // fire a hit and return the cycles until peak (or -1 if none within limit)
  task automatic fire(int ev, output int cyc);
    @(negedge clk); hit = 1; hit_q = CHARGE_W'(ev);
    @(negedge clk); hit = 0;
    cyc = -1;
    for (int k = 0; k < 200; k++) begin
      if (peak) begin cyc = k; break; end
      @(negedge clk);
    end
  endtask

  task automatic clear();
    @(negedge clk); pd_clear = 1; @(negedge clk); pd_clear = 0; @(negedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int cyc, code, thr;
    gcfg = '0; ccfg = '0;
    gcfg.gain = 2'd3; gcfg.shaping = 2'd0; gcfg.thr = 10'd100; gcfg.tmode = TMODE_TOA;
    ccfg.trim = 4'd8;
    repeat (2) @(posedge clk); rst_n = 1;
    // every gain and shaping setting
    for (int g = 0; g < 4; g++) for (int s = 0; s < 4; s++) begin
      gcfg.gain = 2'(g); gcfg.shaping = 2'(s);
      fire(10000, cyc);
      code = 10000 * 4095 / FS[g];
      chk(cyc == PK[s], $sformatf("peaking delay g%0d s%0d: %0d", g, s, cyc));
      chk(pdo == LEVEL_W'(code), $sformatf("amplitude g%0d: %0d vs %0d", g, pdo, code));
      clear();
      chk(!peak, "clear releases peak");
    end
    // saturation
    gcfg.gain = 0; gcfg.shaping = 0;
    fire(100000, cyc); chk(pdo == 12'hFFF, "saturation"); clear();
    // threshold with trim: thr = 100*4+(trim-8)*4 ; gain 3 -> code = ev*4095/75000
    gcfg.gain = 3;
    ccfg.trim = 4'd15; thr = 400 + 7 * 4;   // 428 -> ev 7838 gives code 427
    fire(7838, cyc); chk(cyc == -1, "below trimmed threshold ignored");
    fire(7900, cyc); chk(cyc == 12, "above trimmed threshold"); clear();
    ccfg.trim = 4'd0;                       // thr = 368 -> ev 6800 gives code 371
    fire(6800, cyc); chk(cyc == 12, "lower trim passes"); clear();
    ccfg.trim = 4'd8;
    // polarity: negative charge accepted only with polarity 1
    fire(-30000, cyc); chk(cyc == -1, "wrong polarity ignored");
    gcfg.polarity = 1;
    fire(-30000, cyc); chk(cyc == 12 && pdo == LEVEL_W'(30000 * 4095 / 75000), "negative polarity");
    // dead time: a second hit while holding is lost
    @(negedge clk); hit = 1; hit_q = -20000; @(negedge clk); hit = 0;
    chk(pdo == LEVEL_W'(30000 * 4095 / 75000), "held value kept during dead time");
    // time of arrival: TAC counts cycles since capture
    chk(tdo >= 2, "TAC running");
    begin
      automatic logic [LEVEL_W-1:0] t0 = tdo;
      repeat (10) @(negedge clk);
      chk(tdo == t0 + 10, "TAC counts one per cycle");
    end
    clear();
    gcfg.polarity = 0;
    // test injection adds to the hit
    @(negedge clk); inj = 1; inj_q = 20000; @(negedge clk); inj = 0;
    repeat (12) @(negedge clk);
    chk(peak && pdo == LEVEL_W'(20000 * 4095 / 75000), "test injection");
    clear();
    // time over threshold
    gcfg.tmode = TMODE_TOT; gcfg.shaping = 1;
    fire(37500, cyc);
    code = 37500 * 4095 / 75000; thr = 400;
    chk(tdo == LEVEL_W'(3 * 25 * (code - thr) / code), $sformatf("time over threshold %0d", tdo));
    clear();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
