// hgcal_daq: the complete back-end DAQ firmware of the HGCAL beam-test prototype.
//
// One sync board paces N_RDOUT readout boards; each readout board reads eight module slots,
// and each module's FPGA reads four Skiroc2-CMS ASICs. The event cycle is:
//   1. an external trigger is synchronized by the sync board and sent to all readout boards,
//      which pass it to the modules; the sync board closes its trigger gate (WaitingForTrigger
//      low) until the cycle ends;
//   2. each board's Pi, seeing the pending trigger, requests the data; every module sends
//      30784 bytes (one bit of each of its ASICs per byte);
//   3. the CTL oRM of each board merges its eight modules into 30784 32-bit words and flags
//      "data ready"; the DAQ server reads them over IPbus;
//   4. the Pi resets the ASICs and signals start of acquisition; the CTL oRM raises ReadoutDone;
//   5. when all enabled boards are done, the sync board re-opens the gate and the CTL FIFOs
//      are cleared while it waits.
// Everything runs on the one 40 MHz clock generated on the sync board. Parts without a logic
// design here are outside: the ASICs (asic_* ports), the Raspberry Pis (SPI ports), and the
// IPbus core with its Ethernet link (ipb_* slave buses, one per board). Sync-board ports beyond
// N_RDOUT are tied to ReadoutDone = 0 and must be masked off in its board-enable register.
// Defaults are the system of the last beam test: 14 readout boards, a 15-port sync board.
module hgcal_daq
  import hgc_pkg::*;
#(
  parameter int unsigned N_RDOUT      = 14,
  parameter int unsigned N_SYNC_PORTS = 15,
  parameter int unsigned DEPTH        = 32768,
  parameter int unsigned EVENT_WORDS  = EVENT_BITS
) (
  input  logic                           clk,
  input  logic                           rst,
  input  logic                           ext_trig_i,
  output logic                           trig_copy_o,
  output logic                           waiting_o,
  // sync board Pi
  input  logic                           sync_spi_sclk,
  input  logic                           sync_spi_cs_n,
  input  logic                           sync_spi_mosi,
  output logic                           sync_spi_miso,
  // readout board Pis
  input  logic [N_RDOUT-1:0]             rb_spi_sclk,
  input  logic [N_RDOUT-1:0][4:0]        rb_spi_cs_n,
  input  logic [N_RDOUT-1:0]             rb_spi_mosi,
  output logic [N_RDOUT-1:0]             rb_spi_miso,
  // IPbus slave bus of each readout board
  input  ipb_wbus_t [N_RDOUT-1:0]        ipb_w,
  output ipb_rbus_t [N_RDOUT-1:0]        ipb_r,
  // ASIC pins, [board][module][asic] / [board][module]
  output logic [N_RDOUT-1:0][7:0]        asic_trig_o,
  output logic [N_RDOUT-1:0][7:0]        asic_rst_o,
  output logic [N_RDOUT-1:0][7:0]        asic_rd_o,
  input  logic [N_RDOUT-1:0][7:0][3:0]   asic_dout_i,
  output logic [N_RDOUT-1:0]             readout_done_o
);
  logic                         trig;
  logic [N_SYNC_PORTS-1:0]      done_bus;

  sync_board #(.N_BOARDS(N_SYNC_PORTS)) u_sync (
    .clk, .rst, .ext_trig_i,
    .spi_sclk(sync_spi_sclk), .spi_cs_n(sync_spi_cs_n), .spi_mosi(sync_spi_mosi),
    .spi_miso(sync_spi_miso),
    .readout_done_i(done_bus), .trig_o(trig), .waiting_o
  );
  assign trig_copy_o = trig;

  always_comb begin
    done_bus = '0;
    done_bus[N_RDOUT-1:0] = readout_done_o;
  end

  for (genvar b = 0; b < N_RDOUT; b++) begin : g_rb
    logic [7:0]      hb_trig, hb_readout, hb_reset, hb_busy, hb_valid;
    logic [7:0][7:0] hb_data;

    readout_board #(.DEPTH(DEPTH), .EVENT_WORDS(EVENT_WORDS)) u_rb (
      .clk, .rst, .trig_i(trig), .waiting_i(waiting_o), .readout_done_o(readout_done_o[b]),
      .spi_sclk(rb_spi_sclk[b]), .spi_cs_n(rb_spi_cs_n[b]), .spi_mosi(rb_spi_mosi[b]),
      .spi_miso(rb_spi_miso[b]), .ipb_w(ipb_w[b]), .ipb_r(ipb_r[b]),
      .hb_trig_o(hb_trig), .hb_readout_o(hb_readout), .hb_reset_o(hb_reset),
      .hb_busy_i(hb_busy), .hb_valid_i(hb_valid), .hb_data_i(hb_data)
    );

    for (genvar m = 0; m < 8; m++) begin : g_hb
      hexaboard_fpga #(.N_BITS(EVENT_WORDS)) u_hb (
        .clk, .rst, .trig_i(hb_trig[m]), .readout_i(hb_readout[m]), .reset_i(hb_reset[m]),
        .asic_trig_o(asic_trig_o[b][m]), .asic_rst_o(asic_rst_o[b][m]),
        .asic_rd_o(asic_rd_o[b][m]), .asic_dout_i(asic_dout_i[b][m]),
        .tx_valid_o(hb_valid[m]), .tx_data_o(hb_data[m]), .busy_o(hb_busy[m])
      );
    end
  end

  initial assert (N_RDOUT <= N_SYNC_PORTS) else $error("more readout boards than sync ports");
endmodule
