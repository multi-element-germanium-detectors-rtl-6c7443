// tb_mars_test_pulse: one pulse per rising test-clock edge, with the DAC-scaled charge.
module tb_mars_test_pulse;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, test_clk = 0, polarity = 0, tp_pulse;
  logic [TPDAC_W-1:0] tp_amp = 10'd150;
  logic signed [CHARGE_W-1:0] tp_charge;
  int checks = 0, failures = 0, pulses = 0;

  mars_test_pulse dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && tp_pulse) pulses++;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (3) @(negedge clk); chk(pulses == 0, "no pulse without test clock");
    for (int i = 1; i <= 5; i++) begin
      test_clk = 1; repeat (7) @(negedge clk); test_clk = 0; repeat (7) @(negedge clk);
      chk(pulses == i, $sformatf("one pulse per edge (%0d)", pulses));
    end
    chk(tp_charge == 150 * 200, "charge scale");
    polarity = 1; @(negedge clk); @(negedge clk);
    chk(tp_charge == -150 * 200, "negative polarity charge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
