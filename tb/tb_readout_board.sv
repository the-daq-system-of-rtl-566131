// tb_readout_board: one readout board (CTL + four DATA oRMs) with eight module FPGAs and 32
// behavioural ASICs, driven as the sync board, the Pi and the DAQ server would. Three events at
// a reduced event length; module 6 is absent in the last one. Checks every 32-bit word
// against the reference format, the trigger count, that ReadoutDone needs both the full read
// and the Pi's start of acquisition, and that the CTL FIFOs are cleared by WaitingForTrigger.
`timescale 1ns/1ps
module tb_readout_board;
  import hgc_pkg::*;
  localparam int EW = 150, DEPTH = 256;
  logic clk = 0, rst = 1, trig = 0, waiting = 1, done;
  always #12.5 clk = ~clk;
  logic [0:0] sclk, mosi, miso; logic [0:0][4:0] cs_n;
  ipb_wbus_t [0:0] w; ipb_rbus_t [0:0] r;
  logic [7:0] hb_trig, hb_rd, hb_rst, hb_busy, hb_valid;
  logic [7:0][7:0] hb_data;
  logic [7:0] atrig, arst, ard;
  logic [7:0][3:0] dout;
  int checks = 0, failures = 0;

  readout_board #(.DEPTH(DEPTH), .EVENT_WORDS(EW)) dut (.clk, .rst, .trig_i(trig), .waiting_i(waiting),
    .readout_done_o(done), .spi_sclk(sclk[0]), .spi_cs_n(cs_n[0]), .spi_mosi(mosi[0]), .spi_miso(miso[0]),
    .ipb_w(w[0]), .ipb_r(r[0]), .hb_trig_o(hb_trig), .hb_readout_o(hb_rd), .hb_reset_o(hb_rst),
    .hb_busy_i(hb_busy), .hb_valid_i(hb_valid), .hb_data_i(hb_data));
  pi_spi_model #(.NBUS(1), .NCS(5)) pi (.sclk, .cs_n, .mosi, .miso);
  ipb_master_model #(.NBUS(1)) ipb (.clk, .w, .r);

  for (genvar m = 0; m < 8; m++) begin : g_m
    hexaboard_fpga #(.N_BITS(EW)) u_hb (.clk, .rst, .trig_i(hb_trig[m]), .readout_i(hb_rd[m]),
      .reset_i(hb_rst[m]), .asic_trig_o(atrig[m]), .asic_rst_o(arst[m]), .asic_rd_o(ard[m]),
      .asic_dout_i(dout[m]), .tx_valid_o(hb_valid[m]), .tx_data_o(hb_data[m]), .busy_o(hb_busy[m]));
    for (genvar a = 0; a < 4; a++) begin : g_a
      skiroc2cms_model #(.CHIP(tb_pkg::chip_id(0, m, a))) u_sk (.clk, .trig(atrig[m]), .rst(arst[m]),
        .rd(ard[m]), .dout(dout[m][3-a]));
    end
  end

  task automatic chk(input string wh, input logic [31:0] got, input logic [31:0] exp);
    checks++; if (got !== exp) begin failures++; if (failures < 20) $display("FAIL %s: %h vs %h", wh, got, exp); end
  endtask

  initial begin
    #(20ms); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] x; logic e;
    logic [7:0] mask;
    repeat (4) @(posedge clk); rst <= 0; repeat (4) @(posedge clk);
    for (int ev = 1; ev <= 3; ev++) begin
      mask = (ev == 3) ? 8'b1011_1111 : 8'hFF;
      pi.write(0, 0, 0, 32'(mask));
      for (int k = 0; k < 4; k++) pi.write(0, 1 + k, 0, 32'(mask[2*k +: 2]));
      if (ev == 1) pi.write(0, 0, 1, 32'h2);
      @(posedge clk); waiting <= 0; trig <= 1; @(posedge clk); trig <= 0;
      for (int k = 0; k < 4; k++) pi.write(0, 1 + k, 1, 32'h1);
      do ipb.read(0, IPB_STATUS, x, e); while (!x[0]);
      ipb.read(0, IPB_TRIGCNT, x, e); chk("trigger count", x, ev);
      for (int n = 0; n < EW; n++) begin
        ipb.read(0, IPB_FIFO, x, e);
        chk($sformatf("ev %0d word %0d", ev, n), x, tb_pkg::exp_ctl_word(0, mask, ev, n));
      end
      for (int k = 0; k < 4; k++) pi.write(0, 1 + k, 1, 32'h2);
      chk("no ReadoutDone before start of acquisition", done, 0);
      pi.write(0, 0, 1, 32'h1);
      chk("ReadoutDone", done, 1);
      waiting <= 1; repeat (3) @(posedge clk);
      ipb.read(0, IPB_STATUS, x, e); chk("cleared while waiting", x[1:0], 2'b10);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
