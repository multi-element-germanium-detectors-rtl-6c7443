// tb_mars_asic: drives one MARS ASIC through its pins as a readout system would.
// The configuration image is built here field by field and shifted in; the read-back on
// cfg_dout is checked. Photons are then put on several strips, including one below threshold,
// one masked channel and a test pulse, and the chip is read until its flag drops: channel
// numbers, amplitudes (from the gain rule) and the time-of-arrival TAC values are checked.
module tb_mars_asic;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, cs = 0, rw = 0, enable = 0, cfg_data = 0, cfg_dout, test_clk = 0;
  logic flag;
  logic [ADDR_W-1:0] addr;
  logic [NCH-1:0] hit = '0;
  logic signed [CHARGE_W-1:0] hit_q [NCH];
  logic [LEVEL_W-1:0] amp_out, time_out;
  int checks = 0, failures = 0;
  logic [CFG_BITS-1:0] img;

  mars_asic dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load(input logic [CFG_BITS-1:0] im);
    for (int i = CFG_BITS - 1; i >= 0; i--) begin
      @(negedge clk); cs = 1; rw = 1; enable = 1; cfg_data = im[i];
    end
    @(negedge clk); cs = 0; rw = 0; enable = 0;
  endtask

  // read one event: returns channel, amplitude, time
  task automatic read(output int ch, output int amp, output int tim);
    int n = 0;
    while (!flag && n < 400) begin @(negedge clk); n++; end
    ch = flag ? int'(addr) : -1; amp = amp_out; tim = time_out;
    cs = 1; rw = 0; enable = 1; @(negedge clk); enable = 0; cs = 0; @(negedge clk);
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    glob_cfg_t g;
    chan_cfg_t c;
    int ch, amp, tim;
    for (int i = 0; i < NCH; i++) hit_q[i] = '0;
    g = '0; g.gain = 3; g.shaping = 0; g.thr = 100; g.tmode = TMODE_TOA; g.tp_amp = 100;
    img = '0;
    img[CFG_BITS-1 -: GLOB_BITS] = g;
    for (int i = 0; i < NCH; i++) begin
      c = '0; c.trim = 8; c.mask = (i == 9); c.tp_en = (i == 20);
      img[i*CHAN_BITS +: CHAN_BITS] = c;
    end
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    chk(!flag, "no flag after reset");
    load(img);
    // read back: shifting the same image again returns it
    for (int i = CFG_BITS - 1; i >= 0; i--) begin
      @(negedge clk); chk(cfg_dout == img[i], "config read-back"); cs = 1; rw = 1; enable = 1; cfg_data = img[i];
    end
    @(negedge clk); cs = 0; rw = 0; enable = 0;
    // photons: 4 (30 keV), 5 (12 keV), 9 masked, 17 below threshold (5 keV)
    @(negedge clk);
    hit[4] = 1; hit_q[4] = 30000; hit[5] = 1; hit_q[5] = 12000;
    hit[9] = 1; hit_q[9] = 40000; hit[17] = 1; hit_q[17] = 5000;
    @(negedge clk); hit = '0;
    repeat (30) @(negedge clk);
    read(ch, amp, tim);
    chk(ch == 4 && amp == 30000 * 4095 / 75000, $sformatf("first event ch %0d amp %0d", ch, amp));
    chk(tim >= 17 && tim <= 19, $sformatf("TAC since capture %0d", tim));
    read(ch, amp, tim);
    chk(ch == 5 && amp == 12000 * 4095 / 75000, $sformatf("second event ch %0d amp %0d", ch, amp));
    chk(tim >= 20 && tim <= 22, $sformatf("TAC of second %0d", tim));
    repeat (20) @(negedge clk);
    chk(!flag, "masked and sub-threshold channels never flag");
    // test pulse into channel 20: 100 * 200 eV
    test_clk = 1; repeat (5) @(negedge clk); test_clk = 0;
    repeat (20) @(negedge clk);
    read(ch, amp, tim);
    chk(ch == 20 && amp == 20000 * 4095 / 75000, $sformatf("test pulse ch %0d amp %0d", ch, amp));
    // pile-up in one channel: second photon while first is held is lost
    hit[4] = 1; hit_q[4] = 30000; @(negedge clk); hit = '0; repeat (20) @(negedge clk);
    hit[4] = 1; hit_q[4] = 60000; @(negedge clk); hit = '0; repeat (20) @(negedge clk);
    read(ch, amp, tim);
    chk(ch == 4 && amp == 30000 * 4095 / 75000, "first photon kept");
    repeat (20) @(negedge clk);
    chk(!flag, "second photon lost in dead time");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
