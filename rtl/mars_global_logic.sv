// mars_global_logic: chip-level readout control of one MARS ASIC.
//
// All channels of a chip share one differential amplitude output and one timing output, so the
// readout system retrieves events one at a time. The global logic chooses one channel among
// those requesting readout, raises `flag`, and presents the channel number on `addr`; `sel`
// steers the output multiplexer to that channel. The choice is held until the readout system
// acknowledges it with a one-cycle `enable` while `cs` is high and `rw` is low; `ack` then pulses
// for the chosen channel, and the next choice is made in round-robin order starting after the
// channel just read, so no channel can be starved. With `cs` and `rw` both high, `enable` shifts
// the configuration register instead (`cfg_shift`).
// Timing: `flag`/`addr` are registered; after an acknowledge, `flag` drops for at least one
// cycle before the next channel is shown. The pin names (R/W, Enable, Clock, CS, Flag, Address)
// follow the chip block diagram; the protocol on them is this design's.
module mars_global_logic
  import mars_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cs,
  input  logic              rw,        // 1: configuration write, 0: event readout
  input  logic              enable,
  input  logic [NCH-1:0]    req,
  output logic              flag,
  output logic [ADDR_W-1:0] addr,
  output logic [ADDR_W-1:0] sel,
  output logic [NCH-1:0]    ack,
  output logic              cfg_shift
);

  logic              rd_ack;
  logic              found;
  logic [ADDR_W-1:0] next;
  logic [ADDR_W-1:0] last;   // channel served most recently

  assign rd_ack    = cs && !rw && enable && flag;
  assign cfg_shift = cs && rw && enable;

  // round-robin search starting one past the last channel served
  always_comb begin
    found = 1'b0;
    next  = '0;
    for (int k = 1; k <= NCH; k++) begin
      automatic logic [ADDR_W-1:0] c = ADDR_W'(int'(last) + k);
      if (!found && req[c]) begin
        found = 1'b1;
        next  = c;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      flag <= 1'b0;
      addr <= '0;
      last <= ADDR_W'(NCH - 1);
    end else if (rd_ack) begin
      flag <= 1'b0;
      last <= addr;
    end else if (!flag && found) begin
      flag <= 1'b1;
      addr <= next;
    end
  end

  assign sel = addr;
  always_comb begin
    ack = '0;
    if (rd_ack) ack[addr] = 1'b1;
  end

  // an acknowledged channel must have been requesting
  a_ack_req: assert property (@(posedge clk) disable iff (!rst_n) rd_ack |-> req[addr]);

endmodule
