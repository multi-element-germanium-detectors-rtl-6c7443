// tb_adc_model: conversion latency and sample-and-hold of the ADC model.
module tb_adc_model;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, valid;
  logic [LEVEL_W-1:0] ain = '0, dout;
  int checks = 0, failures = 0;

  adc_model #(.CONV_CYC(4)) dut (.*);
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
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      automatic logic [LEVEL_W-1:0] v = LEVEL_W'($urandom);
      automatic int n = 0;
      @(negedge clk); ain = v; start = 1;
      @(negedge clk); start = 0; ain = ~v;     // input changes after sampling
      while (!valid && n < 20) begin @(negedge clk); n++; end
      chk(n == 4, $sformatf("latency %0d", n));
      chk(dout == v, "held sample converted");
      @(negedge clk); chk(!valid, "valid is one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
