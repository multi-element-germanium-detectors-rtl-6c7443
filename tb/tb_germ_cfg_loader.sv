// tb_germ_cfg_loader: the loader shifts the image MSB first into the selected chip only,
// one bit per cycle, and takes CFG_BITS cycles. A shift register stands in for the chip.
module tb_germ_cfg_loader;
  import mars_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0, start = 0, busy, done, rw, enable, cfg_data;
  logic [ASIC_W-1:0] asic_sel = '0;
  logic [CFG_BITS-1:0] image, got [N];
  logic [N-1:0] cs;
  int checks = 0, failures = 0, busy_cyc = 0;

  germ_cfg_loader #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) if (cs[i] && rw && enable) got[i] <= {got[i][CFG_BITS-2:0], cfg_data};
    if (busy) busy_cyc <= busy_cyc + 1;
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
    for (int i = 0; i < N; i++) got[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 2; a >= 1; a--) begin
      automatic int n = 0;
      for (int i = 0; i < CFG_BITS; i++) image[i] = 1'($urandom);
      busy_cyc = 0;
      @(negedge clk); start = 1; asic_sel = ASIC_W'(a);
      @(negedge clk); start = 0;
      while (!done && n < 1000) begin @(negedge clk); n++; end
      chk(got[a] == image, $sformatf("image arrived in asic %0d", a));
      chk(busy_cyc == CFG_BITS, $sformatf("%0d cycles", busy_cyc));
    end
    chk(got[0] == '0, "unselected chip untouched");
    @(negedge clk); start = 1; asic_sel = ASIC_W'(7); @(negedge clk); start = 0;
    @(negedge clk); chk(!busy, "out-of-range chip ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
