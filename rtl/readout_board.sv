// readout_board: firmware of one readout board, one CTL oRM and four DATA oRMs.
//
// The board reads up to eight modules. DATA oRM k serves modules 2k and 2k+1 and streams their
// paired bytes to the CTL oRM, which merges the four streams into 32-bit event words for the
// DAQ server (IPbus) and reports ReadoutDone to the sync board. Trigger and WaitingForTrigger
// come from the sync board over the back-panel HDMI cable; the Trigger is forwarded to every
// oRM, and through the DATA oRMs to the modules. The board's Raspberry Pi reaches the five
// oRMs over one SPI bus with a chip select each: spi_cs_n[0] = CTL, spi_cs_n[1+k] = DATA oRM k;
// the MISO line of the selected oRM is passed back to the Pi.
// The oRM count and roles follow the board description; the SPI select scheme is this design's.
module readout_board
  import hgc_pkg::*;
#(
  parameter int unsigned DEPTH       = 32768,
  parameter int unsigned EVENT_WORDS = EVENT_BITS
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              trig_i,
  input  logic              waiting_i,
  output logic              readout_done_o,
  input  logic              spi_sclk,
  input  logic [4:0]        spi_cs_n,
  input  logic              spi_mosi,
  output logic              spi_miso,
  input  ipb_wbus_t         ipb_w,
  output ipb_rbus_t         ipb_r,
  // module links, index = module number on the board
  output logic [7:0]        hb_trig_o,
  output logic [7:0]        hb_readout_o,
  output logic [7:0]        hb_reset_o,
  input  logic [7:0]        hb_busy_i,
  input  logic [7:0]        hb_valid_i,
  input  logic [7:0][7:0]   hb_data_i
);
  logic [4:0]        miso;
  logic [3:0]        s_valid, s_ready;
  logic [3:0][15:0]  s_data;

  ctl_orm #(.DEPTH(DEPTH), .EVENT_WORDS(EVENT_WORDS)) u_ctl (
    .clk, .rst, .trig_i, .waiting_i, .readout_done_o,
    .spi_sclk, .spi_cs_n(spi_cs_n[0]), .spi_mosi, .spi_miso(miso[0]),
    .rx_valid_i(s_valid), .rx_data_i(s_data), .rx_ready_o(s_ready),
    .ipb_w, .ipb_r
  );

  for (genvar k = 0; k < 4; k++) begin : g_data
    data_orm #(.DEPTH(DEPTH)) u_data (
      .clk, .rst, .trig_i,
      .spi_sclk, .spi_cs_n(spi_cs_n[1+k]), .spi_mosi, .spi_miso(miso[1+k]),
      .hb_trig_o(hb_trig_o[2*k +: 2]), .hb_readout_o(hb_readout_o[2*k +: 2]),
      .hb_reset_o(hb_reset_o[2*k +: 2]), .hb_busy_i(hb_busy_i[2*k +: 2]),
      .hb_valid_i(hb_valid_i[2*k +: 2]), .hb_data_i(hb_data_i[2*k +: 2]),
      .tx_valid_o(s_valid[k]), .tx_data_o(s_data[k]), .tx_ready_i(s_ready[k])
    );
  end

  always_comb begin
    spi_miso = 1'b0;
    for (int i = 0; i < 5; i++) if (!spi_cs_n[i]) spi_miso = miso[i];
  end
endmodule
