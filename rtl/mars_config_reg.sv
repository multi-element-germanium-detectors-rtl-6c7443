// mars_config_reg: the serial configuration register of one MARS ASIC.
//
// The register is a CFG_BITS-long shift register. While shift_en is high, one bit of cfg_din
// enters at the least significant end on each clock and the most significant bit leaves on
// cfg_dout, so the image is sent most-significant bit first and can be read back or daisy
// chained. The register contents drive the chip directly: the global settings (gain, shaping,
// polarity, timing mode, threshold and test-pulse DACs) and one chan_cfg_t per channel.
// That the chip has one configuration register feeding the channels, DACs, test-pulse generator
// and global logic follows the block diagram; the serial format, the bit order and the reset
// value (all channels masked, everything else zero) are this design's choices.
module mars_config_reg
  import mars_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      shift_en,
  input  logic      cfg_din,
  output logic      cfg_dout,
  output glob_cfg_t gcfg,
  output chan_cfg_t ccfg [NCH]
);

  logic [CFG_BITS-1:0] sr;

  function automatic logic [CFG_BITS-1:0] reset_image();
    logic [CFG_BITS-1:0] img = '0;
    chan_cfg_t c = '0;
    c.mask = 1'b1;
    for (int i = 0; i < NCH; i++) img[i*CHAN_BITS +: CHAN_BITS] = c;
    return img;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        sr <= reset_image();
    else if (shift_en) sr <= {sr[CFG_BITS-2:0], cfg_din};
  end

  assign cfg_dout = sr[CFG_BITS-1];
  assign gcfg     = glob_cfg_t'(sr[CFG_BITS-1 -: GLOB_BITS]);

  always_comb
    for (int i = 0; i < NCH; i++) ccfg[i] = chan_cfg_t'(sr[i*CHAN_BITS +: CHAN_BITS]);

endmodule
