// germ_cfg_loader: writes a configuration image into one MARS ASIC.
//
// On `start`, the loader selects ASIC `asic_sel` (its cs high, rw high) and shifts the
// CFG_BITS-bit `image` into it, most significant bit first, one bit per clock with `enable`
// high; `cfg_data` carries the bit. `busy` is high from the cycle after `start` until the last
// bit has been shifted, and `done` pulses once at the end. A `start` while busy is ignored.
// One bit per clock cycle and one ASIC at a time are this design's choices.
module germ_cfg_loader
  import mars_pkg::*;
#(
  parameter int unsigned N = NASIC
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [ASIC_W-1:0]   asic_sel,
  input  logic [CFG_BITS-1:0] image,
  output logic                busy,
  output logic                done,
  output logic [N-1:0]        cs,
  output logic                rw,
  output logic                enable,
  output logic                cfg_data
);

  logic [CFG_BITS-1:0]         sr;
  logic [$clog2(CFG_BITS):0]   left;
  logic [ASIC_W-1:0]           tgt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr   <= '0;
      left <= '0;
      tgt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start && int'(asic_sel) < int'(N)) begin
          sr   <= image;
          left <= ($clog2(CFG_BITS)+1)'(CFG_BITS);
          tgt  <= asic_sel;
          busy <= 1'b1;
        end
      end else begin
        sr   <= {sr[CFG_BITS-2:0], 1'b0};
        left <= left - 1'b1;
        if (left == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_comb begin
    cs = '0;
    if (busy) cs[tgt] = 1'b1;
  end
  assign rw       = busy;
  assign enable   = busy;
  assign cfg_data = sr[CFG_BITS-1];

endmodule
