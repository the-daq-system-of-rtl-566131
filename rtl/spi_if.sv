// spi_if: SPI register interface of an oRM ("SPI Interface Logic" of the sync and readout boards).
//
// The Raspberry Pi on each board controls its oRMs over an SPI bus. This slave gives the Pi NREGS
// 32-bit control registers it can write and read back, plus NREGS status words it can only read.
// The frame format is this design's choice: SPI mode 0 (data sampled on the rising edge of SCLK,
// changed on the falling edge), MSB first, 40 bits per frame while CS_N is low:
//     bit 39      : 1 = write, 0 = read
//     bits 38..32 : address; bit 6 of it set selects the status bank
//     bits 31..0  : write data (write), or data shifted out on MISO (read)
// A write takes effect when CS_N rises after exactly 40 clocks and raises wr_pulse_o[addr] for one
// system clock. A read loads the addressed word after the 8th bit, so it appears on MISO during
// bits 31..0. SCLK, CS_N and MOSI are oversampled by the 40 MHz system clock through two-flop
// synchronizers, so SCLK must be slower than clk/4.
module spi_if #(
  parameter int unsigned NREGS = 8
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        spi_sclk,
  input  logic                        spi_cs_n,
  input  logic                        spi_mosi,
  output logic                        spi_miso,
  output logic [NREGS-1:0][31:0]      ctrl_o,
  output logic [NREGS-1:0]            wr_pulse_o,
  input  logic [NREGS-1:0][31:0]      stat_i
);
  logic [2:0] sclk_s, cs_s;
  logic [1:0] mosi_s;
  logic [39:0] sh_in;
  logic [31:0] sh_out;
  logic [5:0]  nbits;

  always_ff @(posedge clk) begin
    if (rst) begin
      sclk_s <= '0; cs_s <= '1; mosi_s <= '0;
    end else begin
      sclk_s <= {sclk_s[1:0], spi_sclk};
      cs_s   <= {cs_s[1:0], spi_cs_n};
      mosi_s <= {mosi_s[0], spi_mosi};
    end
  end

  wire sclk_rise = sclk_s[1] & ~sclk_s[2];
  wire sclk_fall = ~sclk_s[1] & sclk_s[2];
  wire cs_active = ~cs_s[1];
  wire cs_rise   = cs_s[1] & ~cs_s[2];

  // address after the 8th bit: sh_in[6:0] at that time
  function automatic logic [31:0] read_word(input logic [6:0] a,
                                            input logic [NREGS-1:0][31:0] c,
                                            input logic [NREGS-1:0][31:0] s);
    logic [31:0] w;
    w = 32'hDEAD_0000;
    for (int i = 0; i < int'(NREGS); i++)
      if (int'(a[5:0]) == i) w = a[6] ? s[i] : c[i];
    return w;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      sh_in <= '0; sh_out <= '0; nbits <= '0; ctrl_o <= '0; wr_pulse_o <= '0; spi_miso <= 1'b0;
    end else begin
      wr_pulse_o <= '0;
      if (!cs_active) begin
        nbits <= '0;
        if (cs_rise && nbits == 6'd40 && sh_in[39] && !sh_in[38]) begin
          for (int i = 0; i < int'(NREGS); i++)
            if (int'(sh_in[37:32]) == i) begin
              ctrl_o[i]     <= sh_in[31:0];
              wr_pulse_o[i] <= 1'b1;
            end
        end
      end else begin
        if (sclk_rise) begin
          sh_in <= {sh_in[38:0], mosi_s[1]};
          nbits <= nbits + 6'd1;
          if (nbits == 6'd7) sh_out <= read_word({sh_in[5:0], mosi_s[1]}, ctrl_o, stat_i);
        end
        if (sclk_fall && nbits >= 6'd8) begin
          spi_miso <= sh_out[31];
          sh_out   <= {sh_out[30:0], 1'b0};
        end
      end
    end
  end
endmodule
