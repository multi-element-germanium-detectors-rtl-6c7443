// tb_mars_channel_logic: checks the per-channel request latch, acknowledge/clear sequence,
// masking and test-pulse gating. A small peak-detector stand-in releases `peak` one cycle after
// `pd_clear`, as the analog model does.
module tb_mars_channel_logic;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0;
  chan_cfg_t ccfg = '0;
  logic peak = 0, ack = 0, tp_pulse = 0, req, pd_clear, tp_inj;
  logic set_peak = 0;
  int checks = 0, failures = 0, clears = 0;

  mars_channel_logic dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    if (pd_clear) peak <= 1'b0;
    else if (set_peak) peak <= 1'b1;
    if (rst_n && pd_clear) clears <= clears + 1;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); chk(!req && !pd_clear, "idle after reset");
    set_peak = 1; @(negedge clk); set_peak = 0;
    @(negedge clk); chk(req, "request after peak");
    repeat (5) @(negedge clk); chk(req && clears == 0, "request held, no clear before ack");
    ack = 1; @(negedge clk); ack = 0;
    chk(!req && pd_clear, "ack clears request and pulses pd_clear");
    @(negedge clk); chk(!pd_clear && !peak, "single clear pulse, peak released");
    repeat (3) @(negedge clk); chk(!req && clears == 1, "no new request without new peak");
    // second event
    set_peak = 1; @(negedge clk); set_peak = 0; @(negedge clk);
    chk(req, "second request");
    ack = 1; @(negedge clk); ack = 0; repeat (2) @(negedge clk);
    chk(!req && clears == 2, "second clear");
    // masked channel: released at once, never requests
    ccfg.mask = 1;
    set_peak = 1; @(negedge clk); set_peak = 0;
    repeat (4) @(negedge clk);
    chk(!req && clears == 3 && !peak, "masked channel auto-clears");
    ccfg.mask = 0;
    // ack without request does nothing
    ack = 1; @(negedge clk); ack = 0; @(negedge clk);
    chk(clears == 3, "stray ack ignored");
    // test pulse gating
    tp_pulse = 1; #1 chk(!tp_inj, "test pulse blocked");
    ccfg.tp_en = 1; #1 chk(tp_inj, "test pulse passed");
    tp_pulse = 0; #1 chk(!tp_inj, "no pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
