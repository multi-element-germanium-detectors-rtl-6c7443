// tb_mars_config_reg: checks the serial configuration register of the MARS ASIC.
// After reset every channel must be masked. A random image is shifted in MSB first and every
// global and per-channel field is compared with the image; a second image is then shifted in and
// the bits leaving on cfg_dout must be the first image, MSB first.
module tb_mars_config_reg;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, shift_en = 0, cfg_din = 0, cfg_dout;
  glob_cfg_t gcfg;
  chan_cfg_t ccfg [NCH];
  int checks = 0, failures = 0;
  logic [CFG_BITS-1:0] img1, img2;

  mars_config_reg dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < CFG_BITS; i++) begin img1[i] = 1'($urandom); img2[i] = 1'($urandom); end
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int i = 0; i < NCH; i++) chk(ccfg[i].mask == 1'b1 && ccfg[i].trim == 0, "reset value");
    chk(gcfg == '0, "reset global");
    for (int i = CFG_BITS - 1; i >= 0; i--) begin
      @(negedge clk); shift_en = 1; cfg_din = img1[i];
    end
    @(negedge clk); shift_en = 0;
    chk(gcfg == glob_cfg_t'(img1[CFG_BITS-1 -: GLOB_BITS]), "global fields");
    chk(gcfg.thr == img1[CFG_BITS-7 -: THR_W], "threshold position");
    for (int c = 0; c < NCH; c++)
      chk(ccfg[c] == chan_cfg_t'(img1[c*CHAN_BITS +: CHAN_BITS]), $sformatf("channel %0d fields", c));
    // hold without shift_en
    repeat (5) @(negedge clk);
    chk(gcfg == glob_cfg_t'(img1[CFG_BITS-1 -: GLOB_BITS]), "holds without shift");
    for (int i = CFG_BITS - 1; i >= 0; i--) begin
      @(negedge clk);
      chk(cfg_dout == img1[i], "read back");
      shift_en = 1; cfg_din = img2[i];
    end
    @(negedge clk); shift_en = 0;
    chk(ccfg[5] == chan_cfg_t'(img2[5*CHAN_BITS +: CHAN_BITS]), "second image");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
