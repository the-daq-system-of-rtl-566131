// ctl_orm: the control (CTL) oRM of a readout board.
//
// It merges the four DATA oRM streams into the single event the DAQ server reads over IPbus,
// and it is the board's link to the sync board. Each DATA oRM stream (16-bit words, valid/
// ready) fills its own DataFIFO. While the sync board holds WaitingForTrigger high, the four
// FIFOs are held in reset (FIFO_Reset), so every event starts from empty buffers. The Trigger
// line passes the Flip-Flop For Trigger and is counted by the Trigger Counter; the IPbus
// Interface publishes the count, the time-stamp, the data-ready flag and the merged 32-bit
// event words, and raises ReadoutDone to the sync board when the event has been read and the
// Pi has re-armed the modules. SPI registers (this design's map):
//     control 0 bits 7:0 : module enable mask, bit i = module i of the board
//     control 1 (write)  : bit 0 = start of acquisition (modules re-armed), bit 1 = configuration
//                          (clears time-stamp and trigger counter)
//     status 0           : trigger count;  status 1 : {31'b0, ReadoutDone}
// A stream is accepted at one word per clock (tx_ready is high unless the FIFO is full).
// Structure and the FIFO_Reset connection follow the readout board's firmware diagram.
module ctl_orm
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
  input  logic              spi_cs_n,
  input  logic              spi_mosi,
  output logic              spi_miso,
  input  logic [3:0]        rx_valid_i,
  input  logic [3:0][15:0]  rx_data_i,
  output logic [3:0]        rx_ready_o,
  input  ipb_wbus_t         ipb_w,
  output ipb_rbus_t         ipb_r
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [1:0][31:0] ctrl, stat;
  logic [1:0]       wr;
  logic             trig, cfg, acq_start, fifo_rd;
  logic [31:0]      trig_count;
  logic [3:0][15:0] f_data;
  logic [3:0]       f_empty, f_full;
  logic [3:0][AW:0] f_count;

  spi_if #(.NREGS(2)) u_spi (
    .clk, .rst, .spi_sclk, .spi_cs_n, .spi_mosi, .spi_miso,
    .ctrl_o(ctrl), .wr_pulse_o(wr), .stat_i(stat)
  );
  assign acq_start = wr[1] & ctrl[1][0];
  assign cfg       = wr[1] & ctrl[1][1];

  trigger_ff u_tff (.clk, .rst, .trig_i, .trig_o(trig));

  trigger_counter #(.W(32)) u_tcnt (.clk, .rst, .clr_i(cfg), .trig_i(trig), .count_o(trig_count));

  for (genvar s = 0; s < 4; s++) begin : g_fifo
    data_fifo #(.W(16), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst, .flush(waiting_i),
      .wr_en(rx_valid_i[s] & rx_ready_o[s]), .wr_data(rx_data_i[s]),
      .rd_en(fifo_rd & (ctrl[0][2*s] | ctrl[0][2*s+1])), .rd_data(f_data[s]),
      .full(f_full[s]), .empty(f_empty[s]), .count(f_count[s])
    );
    assign rx_ready_o[s] = ~f_full[s];
  end

  ipbus_interface #(.EVENT_WORDS(EVENT_WORDS), .CW(AW+1)) u_ipb (
    .clk, .rst, .ipb_w, .ipb_r, .trig_i(trig), .cfg_i(cfg), .acq_start_i(acq_start),
    .waiting_i, .mod_en_i(ctrl[0][7:0]), .trig_count_i(trig_count),
    .fifo_data_i(f_data), .fifo_empty_i(f_empty), .fifo_count_i(f_count),
    .fifo_rd_o(fifo_rd), .readout_done_o
  );

  assign stat[0] = trig_count;
  assign stat[1] = {31'b0, readout_done_o};
endmodule
