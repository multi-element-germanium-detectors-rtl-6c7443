// sync_fifo: single-clock first-in first-out buffer with valid/ready handshakes on both sides.
//
// DEPTH entries of WIDTH bits, stored in a register array with read and write pointers one bit
// wider than the address so that full and empty can be told apart. A word is written when
// in_valid && in_ready and read when out_valid && out_ready; both can happen in one cycle.
// out_data shows the oldest entry combinationally. `level` is the number of words held.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [WIDTH-1:0]         in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [WIDTH-1:0]         out_data,
  output logic [$clog2(DEPTH):0]   level
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wp, rp;
  logic             push, pop;

  assign level     = wp - rp;
  assign in_ready  = (level != (AW+1)'(DEPTH));
  assign out_valid = (level != 0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) if (push) mem[wp[AW-1:0]] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
    end
  end

endmodule
