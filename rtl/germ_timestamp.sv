// germ_timestamp: the readout system clock, used to time-stamp every event.
//
// A TS_W-bit counter advances by one each clock cycle. When the timing event receiver signals
// a synchronisation (`sync`), the counter is loaded with the global time it supplies
// (`sync_time`), so that event timestamps follow the facility-wide clock and data streams can be
// merged afterwards. The counter's width and the load behaviour (the loaded value is used as is
// and counting continues from it) are this design's choices.
module germ_timestamp
  import mars_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sync,
  input  logic [TS_W-1:0] sync_time,
  output logic [TS_W-1:0] ts
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    ts <= '0;
    else if (sync) ts <= sync_time;
    else           ts <= ts + 1'b1;
  end

endmodule
