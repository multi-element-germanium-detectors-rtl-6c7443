// tb_germ_asic_readout: one readout sequencer against a scripted chip and two ADCs.
// The stand-in chip holds a queue of (channel, amplitude, time) events: it raises flag with the
// front event's channel, and drops it for two cycles after each acknowledge. The ADC stand-ins
// answer 4 cycles after start with the front event's values. Each delivered event, the number of
// acknowledges, back-pressure and the cycles per event are checked.
module tb_germ_asic_readout;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, run = 0, flag = 0, cs, enable, adc_start, ev_valid, ev_ready = 1;
  logic [ASIC_W-1:0] asic_id = 4'd7;
  logic [TS_W-1:0] ts = '0;
  logic [ADDR_W-1:0] addr = '0;
  logic amp_valid = 0, tim_valid = 0;
  logic [LEVEL_W-1:0] amp_data = '0, tim_data = '0;
  raw_event_t ev;
  int checks = 0, failures = 0, acks = 0, gap = 0, got = 0;
  int qch [$], qamp [$], qtim [$];
  int conv = -1;

  germ_asic_readout #(.SETTLE_CYC(4), .GAP_CYC(2)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) ts <= ts + 1;

  // chip and ADC stand-ins
  always @(posedge clk) if (rst_n) begin
    amp_valid <= 0; tim_valid <= 0;
    if (adc_start) begin
      if (!cs) begin failures++; $display("FAIL: ADC started without chip select"); end
      conv <= 3;
    end else if (conv > 0) conv <= conv - 1;
    else if (conv == 0) begin
      amp_valid <= 1; amp_data <= LEVEL_W'(qamp[0]);
      tim_valid <= 1; tim_data <= LEVEL_W'(qtim[0]);
      conv <= -1;
    end
    if (gap > 0) gap <= gap - 1;
    if (cs && enable) begin
      acks <= acks + 1;
      void'(qch.pop_front()); void'(qamp.pop_front()); void'(qtim.pop_front());
      gap <= 2;
    end
  end
  always_comb begin
    flag = (qch.size() > 0) && gap == 0;
    addr = (qch.size() > 0) ? ADDR_W'(qch[0]) : '0;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int ech [$], eamp [$], etim [$];
    longint t_first, t_last;
    for (int i = 0; i < 10; i++) begin
      qch.push_back(i * 3 % 32); qamp.push_back(100 + 37 * i); qtim.push_back(5 + i);
      ech.push_back(i * 3 % 32); eamp.push_back(100 + 37 * i); etim.push_back(5 + i);
    end
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (5) @(negedge clk);
    chk(acks == 0 && !cs, "nothing read while stopped");
    run = 1;
    while (got < 10) begin
      @(negedge clk);
      ev_ready = (got == 4) ? 1'b0 : 1'b1;   // back-pressure on the fifth event for a while
      if (got == 4 && ev_valid) begin
        repeat (10) @(negedge clk);
        chk(ev_valid && acks == 4, "event held and not acknowledged under back-pressure");
        ev_ready = 1;
      end
      #1;
      if (ev_valid && ev_ready) begin
        chk(ev.asic == 4'd7 && int'(ev.chan) == ech[got] && int'(ev.amp) == eamp[got] && int'(ev.tdo) == etim[got],
            $sformatf("event %0d: ch %0d amp %0d tdo %0d", got, ev.chan, ev.amp, ev.tdo));
        if (got == 0) t_first = longint'(ev.ts);
        if (got == 3) t_last = longint'(ev.ts);
        got++;
      end
    end
    // cycles per event: idle 1 + settle 4 + conv (4 + 1) + out 1 + ack 1 + gap 2 = 14
    chk(t_last - t_first == 3 * 14, $sformatf("cycles per event %0d", (t_last - t_first) / 3));
    repeat (30) @(negedge clk);
    chk(acks == 10 && !cs, "every event acknowledged once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
