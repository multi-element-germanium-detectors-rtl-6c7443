// tb_germ_event_merge: three random producers into the merge; every event must come out once,
// in order per producer, and no producer may be starved while the others stay busy.
module tb_germ_event_merge;
  import mars_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0, out_valid, out_ready = 0;
  logic [N-1:0] in_valid = '0, in_ready;
  raw_event_t in_ev [N];
  raw_event_t out_ev;
  logic [3:0] level;
  int checks = 0, failures = 0;
  int sent [N], recv [N];

  germ_event_merge #(.N(N), .DEPTH(8)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // producers: event i of producer p carries asic=p, ts=i; a held event stays until taken
  always @(posedge clk) if (rst_n)
    for (int p = 0; p < N; p++) begin
      automatic bit acc = in_valid[p] && in_ready[p];
      automatic int s = sent[p] + int'(acc);
      sent[p] <= s;
      if (acc || !in_valid[p]) begin
        in_valid[p]  <= (s < 200) && (p == 0 || $urandom % 2 == 0);
        in_ev[p].ts  <= TS_W'(s);
      end
    end

  initial begin
    for (int p = 0; p < N; p++) begin sent[p] = 0; recv[p] = 0; in_ev[p] = '0; in_ev[p].asic = ASIC_W'(p); end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      out_ready = 1'($urandom);
      #1;
      if (out_valid && out_ready) begin
        chk(int'(out_ev.ts) == recv[out_ev.asic], $sformatf("order of producer %0d", out_ev.asic));
        recv[out_ev.asic]++;
      end
    end
    for (int p = 0; p < N; p++) chk(recv[p] == 200, $sformatf("producer %0d delivered %0d", p, recv[p]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
