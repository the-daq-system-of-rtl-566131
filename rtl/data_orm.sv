// data_orm: one DATA oRM of a readout board, serving up to two modules.
//
// Each of the two module links ends in a Hexaboard Bridge Logic (commands to the module) and a
// byte-wide DataFIFO that the module writes directly. A pairing stage pops the two module FIFOs
// together and writes one 16-bit word {byte of module A, byte of module B} into the oRM's output
// DataFIFO, which streams to the CTL oRM over a valid/ready interface (tx_*). A module disabled
// by the Pi contributes 8'h00 and its FIFO is held empty, so a DATA oRM with one module still
// produces complete words. The Flip-Flop For Trigger registers the board's Trigger for both
// bridges. SPI registers (this design's map):
//     control 0 bits 1:0 : module enable {B, A}
//     control 1 (write)  : bit 0 = readout request to both modules, bit 1 = ASIC reset
//     status 0           : {bytes received from B, bytes received from A}
//     status 1           : {28'b0, sending B, sending A, trigger pending B, trigger pending A}
// Throughput is one 16-bit word per clock once both module FIFOs hold data; a module's event
// (30784 bytes) fits whole in its FIFO. The block structure follows the readout board's firmware
// diagram; pairing, zero fill and the interfaces are this design's choices.
module data_orm #(
  parameter int unsigned DEPTH  = 32768
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              trig_i,
  input  logic              spi_sclk,
  input  logic              spi_cs_n,
  input  logic              spi_mosi,
  output logic              spi_miso,
  // module links, index 0 = module A, 1 = module B
  output logic [1:0]        hb_trig_o,
  output logic [1:0]        hb_readout_o,
  output logic [1:0]        hb_reset_o,
  input  logic [1:0]        hb_busy_i,
  input  logic [1:0]        hb_valid_i,
  input  logic [1:0][7:0]   hb_data_i,
  // stream to the CTL oRM
  output logic              tx_valid_o,
  output logic [15:0]       tx_data_o,
  input  logic              tx_ready_i
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [1:0][31:0] ctrl, stat;
  logic [1:0]       wr;
  logic             trig;
  logic [1:0]       en, m_empty, m_full, m_rd, triggered, sending;
  logic [1:0][7:0]  m_data;
  logic [1:0][15:0] nbytes;
  logic             p_full, p_empty, pair_go;
  logic [AW:0]      p_count;
  logic [1:0][AW:0] m_count;

  spi_if #(.NREGS(2)) u_spi (
    .clk, .rst, .spi_sclk, .spi_cs_n, .spi_mosi, .spi_miso,
    .ctrl_o(ctrl), .wr_pulse_o(wr), .stat_i(stat)
  );

  trigger_ff u_tff (.clk, .rst, .trig_i, .trig_o(trig));

  assign en = ctrl[0][1:0];

  for (genvar m = 0; m < 2; m++) begin : g_mod
    hexaboard_bridge u_bridge (
      .clk, .rst, .trig_i(trig),
      .cmd_readout_i(wr[1] & ctrl[1][0] & en[m]),
      .cmd_reset_i(wr[1] & ctrl[1][1]),
      .hb_trig_o(hb_trig_o[m]), .hb_readout_o(hb_readout_o[m]), .hb_reset_o(hb_reset_o[m]),
      .hb_busy_i(hb_busy_i[m]), .rx_valid_i(hb_valid_i[m]),
      .triggered_o(triggered[m]), .sending_o(sending[m]), .bytes_o(nbytes[m])
    );

    data_fifo #(.W(8), .DEPTH(DEPTH)) u_mfifo (
      .clk, .rst, .flush(~en[m]),
      .wr_en(hb_valid_i[m] & en[m]), .wr_data(hb_data_i[m]),
      .rd_en(m_rd[m]), .rd_data(m_data[m]),
      .full(m_full[m]), .empty(m_empty[m]), .count(m_count[m])
    );
    assign m_rd[m] = pair_go & en[m];
  end

  // pop both module FIFOs together when every enabled one has a byte
  assign pair_go = (|en) && !p_full && !(en[0] && m_empty[0]) && !(en[1] && m_empty[1]);

  data_fifo #(.W(16), .DEPTH(DEPTH)) u_pfifo (
    .clk, .rst, .flush(1'b0),
    .wr_en(pair_go),
    .wr_data({en[0] ? m_data[0] : 8'h00, en[1] ? m_data[1] : 8'h00}),
    .rd_en(tx_valid_o & tx_ready_i), .rd_data(tx_data_o),
    .full(p_full), .empty(p_empty), .count(p_count)
  );
  assign tx_valid_o = ~p_empty;

  assign stat[0] = {nbytes[1], nbytes[0]};
  assign stat[1] = {28'b0, sending, triggered};
endmodule
