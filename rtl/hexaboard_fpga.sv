// hexaboard_fpga: readout logic of the module's (hexaboard's) FPGA.
//
// A module carries four Skiroc2-CMS ASICs. On a trigger from the readout board this block
// passes a one-clock trigger to the four ASICs, which freeze their analogue memories and
// digitise. When the readout board then requests the data (readout_i), the block reads the four
// ASICs in parallel, one bit of each per 40 MHz clock, and sends one byte per clock:
//     byte = {4'b1000, bit of ASIC 0, bit of ASIC 1, bit of ASIC 2, bit of ASIC 3}
// for N_BITS clocks (30784 = 1924 sixteen-bit ASIC words), i.e. 30784 bytes per event.
// ASIC serial interface (this design's choice): asic_dout_i[k] shows ASIC k's current bit; the
// clock edge at which asic_rd_o is high consumes it and the ASIC shows the next bit by the
// next edge. The byte built from a bit appears on tx_data_o one clock after that edge, with
// tx_valid_o. busy_o is high from the request until the last byte is sent. reset_i (ASIC reset
// from the readout board) aborts a transfer and is passed to the ASICs as asic_rst_o.
// The byte format follows the published hexaboard format; the bit rate and handshakes are this
// design's choices.
module hexaboard_fpga
  import hgc_pkg::*;
#(
  parameter int unsigned N_BITS = EVENT_BITS
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       trig_i,
  input  logic       readout_i,
  input  logic       reset_i,
  output logic       asic_trig_o,
  output logic       asic_rst_o,
  output logic       asic_rd_o,
  input  logic [3:0] asic_dout_i,
  output logic       tx_valid_o,
  output logic [7:0] tx_data_o,
  output logic       busy_o
);
  localparam int unsigned CW = $clog2(N_BITS + 1);
  logic [CW-1:0] left;

  assign busy_o    = (left != '0);
  assign asic_rd_o = busy_o & ~reset_i;

  always_ff @(posedge clk) begin
    if (rst) begin
      left <= '0; tx_valid_o <= 1'b0; tx_data_o <= '0; asic_trig_o <= 1'b0; asic_rst_o <= 1'b0;
    end else begin
      asic_trig_o <= trig_i;
      asic_rst_o  <= reset_i;
      tx_valid_o  <= asic_rd_o;
      if (asic_rd_o) tx_data_o <= hb_byte(asic_dout_i);
      if (reset_i)                 left <= '0;
      else if (busy_o)             left <= left - CW'(1);
      else if (readout_i)          left <= CW'(N_BITS);
    end
  end
endmodule
