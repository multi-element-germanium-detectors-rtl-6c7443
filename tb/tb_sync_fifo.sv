// tb_sync_fifo: random pushes and pops against a queue reference; full and empty limits.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0, in_valid = 0, out_ready = 0, in_ready, out_valid;
  logic [15:0] in_data = '0, out_data;
  logic [3:0] level;
  int checks = 0, failures = 0;
  logic [15:0] q [$];

  sync_fifo #(.WIDTH(16), .DEPTH(8)) dut (.*);
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
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      in_valid = 1'($urandom); in_data = 16'($urandom); out_ready = (t < 1000) ? ($urandom % 4 == 0) : 1'($urandom);
      #1;
      chk(level == 4'(q.size()), "level");
      chk(in_ready == (q.size() < 8) && out_valid == (q.size() > 0), "full/empty");
      if (out_valid) chk(out_data == q[0], "data order");
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
