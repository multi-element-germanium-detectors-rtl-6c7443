// tb_mars_global_logic: checks flag/address presentation, round-robin order, that the selection
// is held until acknowledged, the acknowledge pulse, and the configuration-shift decode.
module tb_mars_global_logic;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, cs = 0, rw = 0, enable = 0;
  logic [NCH-1:0] req = '0, ack;
  logic flag, cfg_shift;
  logic [ADDR_W-1:0] addr, sel;
  int checks = 0, failures = 0;

  mars_global_logic dut (.*);
  always #5 clk = ~clk;
  // requests are cleared by their acknowledge, as the channel logic does
  always_ff @(posedge clk) req <= req & ~ack;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic read_one(output int a);
    int n = 0;
    while (!flag && n < 50) begin @(negedge clk); n++; end
    a = flag ? int'(addr) : -1;
    chk(sel == addr, "mux follows address");
    cs = 1; rw = 0; enable = 1;
    #1 chk(ack == (NCH'(1) << addr), "acknowledge one-hot");
    @(negedge clk); cs = 0; enable = 0;
    chk(!flag, "flag drops after acknowledge");
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int a;
    int exp_order [5] = '{3, 7, 30, 2, 3};
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); chk(!flag, "no flag without requests");
    req[3] = 1; req[7] = 1; req[30] = 1;
    @(negedge clk); @(negedge clk);
    chk(flag && addr == 3, "lowest first after reset");
    // selection held while a new lower request arrives
    req[2] = 1; repeat (3) @(negedge clk);
    chk(addr == 3, "selection held until acknowledge");
    for (int i = 0; i < 4; i++) begin
      read_one(a);
      chk(a == exp_order[i], $sformatf("order %0d: got %0d", i, a));
      if (i == 1) req[3] = 1;  // channel 3 fires again; must wait behind 30 and 2
    end
    read_one(a); chk(a == exp_order[4], "wrap-around round robin");
    repeat (3) @(negedge clk); chk(!flag, "all served");
    // configuration shift decode
    cs = 1; rw = 1; enable = 1; #1 chk(cfg_shift && ack == 0, "config shift");
    cs = 0; #1 chk(!cfg_shift, "no shift without cs");
    enable = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
