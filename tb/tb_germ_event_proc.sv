// tb_germ_event_proc: per-strip linear calibration and arrival-time reconstruction.
// Calibration lines are derived here from two reference energies (14.4 keV and 122 keV) at
// random ADC positions per strip, and the block's energies are compared with the line
// evaluated in this testbench. Time of arrival must be ts - tdo in that mode and ts otherwise.
module tb_germ_event_proc;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, cal_we = 0, in_valid = 0, in_ready, out_valid, out_ready = 1;
  tmode_e tmode = TMODE_TOA;
  logic [STRIP_W-1:0] cal_addr = '0;
  logic [15:0] cal_gain = '0;
  logic signed [15:0] cal_off = '0;
  raw_event_t in_ev = '0;
  event_t out_ev;
  int checks = 0, failures = 0;
  int gain [NSTRIP], off [NSTRIP];

  germ_event_proc dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // two-point calibration per strip
    for (int s = 0; s < int'(NSTRIP); s++) begin
      automatic int a14 = 300 + $urandom % 40, a122 = 2600 + $urandom % 300;
      gain[s] = ((122000 - 14400) * 256) / (a122 - a14);
      off[s]  = 14400 - (a14 * gain[s]) / 256;
      @(negedge clk); cal_we = 1; cal_addr = STRIP_W'(s); cal_gain = 16'(gain[s]); cal_off = 16'(off[s]);
    end
    @(negedge clk); cal_we = 0;
    for (int t = 0; t < 600; t++) begin
      automatic int a = $urandom % 12, c = $urandom % 32, amp = $urandom % 4096, s = a * 32 + c;
      automatic int e = (amp * gain[s]) / 256 + off[s];
      automatic logic [TS_W-1:0] ts = {16'h0, 32'($urandom)};
      automatic int td = $urandom % 4096;
      if (e < 0) e = 0;
      tmode = (t % 5 == 4) ? TMODE_TOT : TMODE_TOA;
      @(negedge clk);
      in_valid = 1; in_ev.asic = 4'(a); in_ev.chan = 5'(c); in_ev.amp = 12'(amp); in_ev.tdo = 12'(td); in_ev.ts = ts;
      @(negedge clk); in_valid = 0;
      chk(out_valid, "one-cycle latency");
      chk(int'(out_ev.strip) == s, "strip number");
      chk(int'(out_ev.energy) == e, $sformatf("energy strip %0d amp %0d: %0d vs %0d", s, amp, out_ev.energy, e));
      chk(out_ev.toa == ((tmode == TMODE_TOA) ? ts - TS_W'(td) : ts), "time of arrival");
    end
    // 122 keV line position lands on 122 keV within rounding
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
