// tb_germ_timestamp: the system clock counts cycles and loads the global time on sync.
module tb_germ_timestamp;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, sync = 0;
  logic [TS_W-1:0] sync_time = '0, ts;
  int checks = 0, failures = 0;

  germ_timestamp dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [TS_W-1:0] t0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); t0 = ts;
    repeat (100) @(negedge clk);
    chk(ts == t0 + 100, "counts cycles");
    sync = 1; sync_time = 48'hFFFF_FFFF_FFF0; @(negedge clk); sync = 0;
    chk(ts == 48'hFFFF_FFFF_FFF0, "loaded from event receiver");
    repeat (20) @(negedge clk);
    chk(ts == 48'h4, "wraps at 48 bits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
