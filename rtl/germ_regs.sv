// germ_regs: memory-mapped registers through which the embedded processor runs the readout.
//
// Software only sets switches and registers; all real-time work stays in the logic. The bus is a
// simple synchronous one: a write takes effect on the clock edge where `we` is high, and
// `rdata` shows the register at `addr` combinationally. Byte addresses, 32-bit registers:
//   0x000 CTRL      rw  [0] run  [1] charge-sharing recombination on  [2] time-of-arrival mode
//   0x004 WINDOW    rw  [7:0] coincidence window, system clock cycles
//   0x008 CFG_CMD   wo  write ASIC number in [3:0]: load the configuration image into that ASIC
//   0x00C STATUS    ro  [0] configuration load busy  [15:8] event FIFO level
//   0x010 EVENTS    ro  events delivered
//   0x014 MERGED    ro  charge-shared pairs recombined
//   0x018 TS_LO     ro  system clock [31:0]     0x01C TS_HI  ro  system clock [47:32]
//   0x040..0x05C    rw  configuration image, word k holds bits 32k+31..32k
//   0x800 + 4*s     wo  calibration of strip s: [31:16] gain (eV/ADU, 8.8), [15:0] offset (eV)
// Reset: stopped, recombination on, time-of-arrival mode, window 4. The register map is this
// design's; memory-mapped control by the processor follows the readout module description.
module germ_regs
  import mars_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic [11:0]         addr,
  input  logic [31:0]         wdata,
  input  logic                we,
  output logic [31:0]         rdata,
  // control
  output logic                run,
  output logic                share_en,
  output tmode_e              tmode,
  output logic [7:0]          window,
  output logic                cfg_start,
  output logic [ASIC_W-1:0]   cfg_asic,
  output logic [CFG_BITS-1:0] cfg_image,
  output logic                cal_we,
  output logic [STRIP_W-1:0]  cal_addr,
  output logic [15:0]         cal_gain,
  output logic signed [15:0]  cal_off,
  // status
  input  logic                cfg_busy,
  input  logic [7:0]          fifo_level,
  input  logic [31:0]         ev_count,
  input  logic [31:0]         merged_count,
  input  logic [TS_W-1:0]     ts
);

  localparam int unsigned NWORD = (CFG_BITS + 31) / 32;

  logic [31:0] img [NWORD];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run       <= 1'b0;
      share_en  <= 1'b1;
      tmode     <= TMODE_TOA;
      window    <= 8'd4;
      cfg_start <= 1'b0;
      cfg_asic  <= '0;
      cal_we    <= 1'b0;
      cal_addr  <= '0;
      cal_gain  <= '0;
      cal_off   <= '0;
      for (int k = 0; k < int'(NWORD); k++) img[k] <= '0;
    end else begin
      cfg_start <= 1'b0;
      cal_we    <= 1'b0;
      if (we) begin
        if (addr[11]) begin
          cal_we   <= 1'b1;
          cal_addr <= STRIP_W'(addr[10:2]);
          cal_gain <= wdata[31:16];
          cal_off  <= wdata[15:0];
        end else begin
          case (addr)
            12'h000: begin
              run      <= wdata[0];
              share_en <= wdata[1];
              tmode    <= tmode_e'(wdata[2]);
            end
            12'h004: window <= wdata[7:0];
            12'h008: begin
              cfg_start <= 1'b1;
              cfg_asic  <= wdata[ASIC_W-1:0];
            end
            default:
              if (addr[11:6] == 6'h01 && int'(addr[4:2]) < int'(NWORD)) img[addr[4:2]] <= wdata;
          endcase
        end
      end
    end
  end

  always_comb
    for (int k = 0; k < int'(NWORD); k++)
      for (int b = 0; b < 32; b++)
        if (k * 32 + b < int'(CFG_BITS)) cfg_image[k*32+b] = img[k][b];

  always_comb begin
    rdata = '0;
    case (addr)
      12'h000: rdata = {29'b0, tmode, share_en, run};
      12'h004: rdata = {24'b0, window};
      12'h00C: rdata = {16'b0, fifo_level, 7'b0, cfg_busy};
      12'h010: rdata = ev_count;
      12'h014: rdata = merged_count;
      12'h018: rdata = ts[31:0];
      12'h01C: rdata = 32'(ts[TS_W-1:32]);
      default:
        if (addr[11:6] == 6'h01 && int'(addr[4:2]) < int'(NWORD)) rdata = img[addr[4:2]];
    endcase
  end

endmodule
