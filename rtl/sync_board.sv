// sync_board: firmware of the sync board, which paces the whole DAQ one event at a time.
//
// The asynchronous external trigger enters the Global Trigger Flip-Flop, which synchronizes it
// to the 40 MHz system clock and forwards it (as trig_o) to every readout board and to the copy
// output for the beam-characterisation detectors. Inside the SYNC oRM the trigger is registered
// again (Flip-Flop For Trigger) and starts a readout cycle: the Trigger Disable Logic closes the
// trigger gate and pulls WaitingForTrigger low; the All_Done Logic collects ReadoutDone from the
// readout boards, and when all enabled boards are done the gate opens again. The Pi talks to
// the oRM through SPI:
//     control 0 bit 0  : Disable (close the trigger gate)
//     control 1        : board-enable mask for ReadoutDone[N_BOARDS-1:0]
//     status 0         : {30'b0, Done, WaitingForTrigger}
//     status 1         : number of triggers accepted since reset
// The block structure and signal names follow the sync board's firmware diagram; the register
// map is this design's choice. Readout boards must only act on trig_o; at most one trig_o
// pulse is issued per readout cycle.
module sync_board #(
  parameter int unsigned N_BOARDS = 15
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                ext_trig_i,
  input  logic                spi_sclk,
  input  logic                spi_cs_n,
  input  logic                spi_mosi,
  output logic                spi_miso,
  input  logic [N_BOARDS-1:0] readout_done_i,
  output logic                trig_o,
  output logic                waiting_o
);
  localparam int unsigned NREGS = 2;
  logic [NREGS-1:0][31:0] ctrl, stat;
  logic [NREGS-1:0]       wr;
  logic trig_disable, trig_int, done;
  logic [31:0] n_trig;

  // A trigger already sent but not yet through the oRM's input flip-flop also closes the gate.
  logic in_flight;
  always_ff @(posedge clk) begin
    if (rst)           in_flight <= 1'b0;
    else if (trig_o)   in_flight <= 1'b1;
    else if (trig_int) in_flight <= 1'b0;
  end

  global_trigger_ff u_gtff (
    .clk, .rst, .ext_trig_i, .trig_disable_i(trig_disable | trig_o | in_flight), .trig_o
  );

  trigger_ff u_tff (.clk, .rst, .trig_i(trig_o), .trig_o(trig_int));

  spi_if #(.NREGS(NREGS)) u_spi (
    .clk, .rst, .spi_sclk, .spi_cs_n, .spi_mosi, .spi_miso,
    .ctrl_o(ctrl), .wr_pulse_o(wr), .stat_i(stat)
  );

  all_done_logic #(.N_BOARDS(N_BOARDS)) u_done (
    .clk, .rst, .trig_i(trig_int), .readout_done_i,
    .board_mask_i(ctrl[1][N_BOARDS-1:0]), .done_o(done)
  );

  trigger_disable_logic u_tdl (
    .clk, .rst, .trig_i(trig_int), .done_i(done), .disable_i(ctrl[0][0]),
    .trig_disable_o(trig_disable), .waiting_o
  );

  always_ff @(posedge clk) begin
    if (rst)           n_trig <= '0;
    else if (trig_int) n_trig <= n_trig + 32'd1;
  end

  assign stat[0] = {30'b0, done, waiting_o};
  assign stat[1] = n_trig;
endmodule
