// germ_event_merge: gathers the event streams of N ASIC sequencers into one buffered stream.
//
// A round-robin arbiter grants one requesting input per cycle, starting after the input granted
// last, and writes its event into a DEPTH-entry FIFO; the granted input sees `in_ready` high in
// that cycle. The FIFO output is the merged stream. Round-robin order and the FIFO depth are this
// design's choices.
module germ_event_merge
  import mars_pkg::*;
#(
  parameter int unsigned N     = NASIC,
  parameter int unsigned DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [N-1:0]           in_valid,
  output logic [N-1:0]           in_ready,
  input  raw_event_t             in_ev [N],
  output logic                   out_valid,
  input  logic                   out_ready,
  output raw_event_t             out_ev,
  output logic [$clog2(DEPTH):0] level
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] last, gnt;
  logic          any, f_ready;

  always_comb begin
    any = 1'b0;
    gnt = '0;
    for (int k = 1; k <= int'(N); k++) begin
      automatic int c = (int'(last) + k) % int'(N);
      if (!any && in_valid[c]) begin
        any = 1'b1;
        gnt = IW'(c);
      end
    end
    in_ready = '0;
    if (any && f_ready) in_ready[gnt] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                last <= IW'(N - 1);
    else if (any && f_ready)   last <= gnt;
  end

  sync_fifo #(.WIDTH($bits(raw_event_t)), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(any), .in_ready(f_ready), .in_data(in_ev[gnt]),
    .out_valid, .out_ready, .out_data(out_ev), .level
  );

endmodule
