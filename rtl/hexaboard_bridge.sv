// hexaboard_bridge: the DATA oRM's "Hexaboard Bridge Logic", the control side of one module link.
//
// It relays three commands to the module's FPGA over the HDMI cable: the trigger (from the
// oRM's trigger flip-flop), the readout request and the ASIC reset (both issued by the Pi over
// SPI: after seeing a trigger the Pi asks the modules to start sending, and after the server has
// read the event it resets the ASICs). Each command is a one-clock pulse, registered once.
// It also watches the link: triggered_o is set by a trigger and cleared by the readout request,
// so the Pi can poll for pending events, and bytes_o counts the bytes received since the last
// trigger (saturating at 16 bits), so the Pi can check an event arrived in full (30784 bytes).
// The byte data itself goes straight from the link into the module's DataFIFO.
// Which commands exist follows the readout sequence of the boards; lines, pulses and counters
// are this design's choices.
module hexaboard_bridge (
  input  logic        clk,
  input  logic        rst,
  input  logic        trig_i,
  input  logic        cmd_readout_i,
  input  logic        cmd_reset_i,
  output logic        hb_trig_o,
  output logic        hb_readout_o,
  output logic        hb_reset_o,
  input  logic        hb_busy_i,
  input  logic        rx_valid_i,
  output logic        triggered_o,
  output logic        sending_o,
  output logic [15:0] bytes_o
);
  always_ff @(posedge clk) begin
    if (rst) begin
      hb_trig_o <= 1'b0; hb_readout_o <= 1'b0; hb_reset_o <= 1'b0;
      triggered_o <= 1'b0; bytes_o <= '0; sending_o <= 1'b0;
    end else begin
      hb_trig_o    <= trig_i;
      hb_readout_o <= cmd_readout_i & ~cmd_reset_i;
      hb_reset_o   <= cmd_reset_i;
      sending_o    <= hb_busy_i;
      if (trig_i)             triggered_o <= 1'b1;
      else if (cmd_readout_i) triggered_o <= 1'b0;
      if (trig_i)                             bytes_o <= '0;
      else if (rx_valid_i && bytes_o != '1)   bytes_o <= bytes_o + 16'd1;
    end
  end
endmodule
