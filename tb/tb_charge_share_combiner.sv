// tb_charge_share_combiner: pairs in adjacent strips within the window are summed into one
// event; pairs too far apart in time or in strips, and lone events, come out unchanged after the
// hold time; a full buffer evicts; with recombination off, events pass straight through.
module tb_charge_share_combiner;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, in_valid = 0, in_ready, out_valid, out_ready = 1, merged;
  logic [7:0] window = 8'd4;
  event_t in_ev = '0, out_ev;
  int checks = 0, failures = 0, nmerged = 0;
  event_t outs [$];

  charge_share_combiner #(.NSLOT(4), .HOLD_CYC(32)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) outs.push_back(out_ev);
    if (merged) nmerged++;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(int strip, int energy, int toa);
    @(negedge clk);
    in_valid = 1; in_ev.strip = STRIP_W'(strip); in_ev.energy = ENERGY_W'(energy);
    in_ev.toa = TS_W'(toa); in_ev.shared = 0;
    #1 while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk); in_valid = 0;
  endtask

  task automatic drain(); repeat (60) @(negedge clk); endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // a shared pair: 40 keV in 100, 13 keV in 101, 2 cycles apart
    send(100, 40000, 1000); send(101, 13000, 1002);
    drain();
    chk(outs.size() == 1 && outs[0].shared && outs[0].energy == 53000 && outs[0].strip == 100 && outs[0].toa == 1000,
        "pair combined, named after larger part");
    chk(nmerged == 1, "merge pulse");
    outs.delete();
    // larger part arrives second
    send(201, 10000, 5000); send(200, 43000, 5004);
    drain();
    chk(outs.size() == 1 && outs[0].energy == 53000 && outs[0].strip == 200 && outs[0].toa == 5004, "reverse order");
    outs.delete();
    // outside the window, non-adjacent strips, same strip: no merging
    send(10, 20000, 100); send(11, 20000, 105);
    send(30, 20000, 200); send(32, 20000, 200);
    drain();
    chk(outs.size() == 4 && nmerged == 2, $sformatf("no false merges (%0d out)", outs.size()));
    foreach (outs[i]) chk(!outs[i].shared, "singles unmarked");
    outs.delete();
    // lone event waits for the hold time before leaving
    send(50, 30000, 700);
    repeat (25) @(negedge clk);
    chk(outs.size() == 0, "held while a partner may come");
    repeat (20) @(negedge clk);
    chk(outs.size() == 1 && outs[0].strip == 50, "released after hold time");
    outs.delete();
    // full buffer: fifth unrelated event evicts the oldest
    for (int i = 0; i < 5; i++) send(300 + 3 * i, 1000 * (i + 1), 9000 + 100 * i);
    @(negedge clk);
    chk(outs.size() == 1 && outs[0].strip == 300, "eviction of the oldest");
    drain();
    chk(outs.size() == 5, "all singles out");
    outs.delete();
    // back-pressure: output held
    out_ready = 0;
    send(60, 30000, 100); send(61, 30000, 101);
    repeat (5) @(negedge clk);
    chk(out_valid && outs.size() == 0, "held under back-pressure");
    out_ready = 1; drain();
    chk(outs.size() == 1 && outs[0].energy == 60000, "delivered after back-pressure");
    outs.delete();
    // bypass
    en = 0;
    send(70, 30000, 100); send(71, 30000, 101);
    repeat (3) @(negedge clk);
    chk(outs.size() == 2 && !outs[0].shared && !outs[1].shared, "bypass passes events straight through");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
