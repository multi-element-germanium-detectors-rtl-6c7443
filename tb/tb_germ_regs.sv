// tb_germ_regs: register writes and reads, command pulses and calibration writes.
module tb_germ_regs;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, we = 0;
  logic [11:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  logic run, share_en, cfg_start, cal_we;
  tmode_e tmode;
  logic [7:0] window;
  logic [ASIC_W-1:0] cfg_asic;
  logic [CFG_BITS-1:0] cfg_image;
  logic [STRIP_W-1:0] cal_addr;
  logic [15:0] cal_gain;
  logic signed [15:0] cal_off;
  logic cfg_busy = 1;
  logic [7:0] fifo_level = 8'd9;
  logic [31:0] ev_count = 32'd1234, merged_count = 32'd56;
  logic [TS_W-1:0] ts = 48'h1234_89AB_CDEF;
  int checks = 0, failures = 0, starts = 0, calw = 0;

  germ_regs dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin if (cfg_start) starts++; if (cal_we) calw++; end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(int a, logic [31:0] d);
    @(negedge clk); addr = 12'(a); wdata = d; we = 1; @(negedge clk); we = 0;
  endtask
  task automatic rd(int a, output logic [31:0] v);
    addr = 12'(a); #1 v = rdata;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [CFG_BITS-1:0] img;
    logic [31:0] r, r2;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    chk(!run && share_en && tmode == TMODE_TOA && window == 4, "reset values");
    wr('h000, 32'h5); chk(run && !share_en && tmode == TMODE_TOA, "ctrl write");
    rd('h000, r); chk(r == 32'h5, "ctrl read");
    wr('h004, 32'h1F); rd('h004, r); chk(window == 8'h1F && r == 32'h1F, "window");
    rd('h00C, r); chk(r == {16'h0, 8'd9, 8'h01}, "status");
    rd('h010, r); rd('h014, r2); chk(r == 1234 && r2 == 56, "counters");
    rd('h018, r); rd('h01C, r2); chk(r == 32'h89AB_CDEF && r2 == 32'h1234, "timestamp");
    for (int i = 0; i < CFG_BITS; i++) img[i] = 1'($urandom);
    for (int k = 0; k < 8; k++) wr('h040 + 4 * k, 32'(img >> (32 * k)));
    chk(cfg_image == img, "configuration image");
    rd('h044, r); chk(r == img[63:32], "image read-back");
    wr('h008, 32'h0000_000B); @(negedge clk);
    chk(starts == 1 && cfg_asic == 4'hB, "config command pulse");
    wr('h800 + 4 * 383, {16'd4608, -16'sd120}); @(negedge clk);
    chk(calw == 1 && cal_addr == 9'd383 && cal_gain == 16'd4608 && cal_off == -16'sd120, "calibration write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
