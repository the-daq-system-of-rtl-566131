// tb_hgcal_daq: end-to-end test of the DAQ at reduced size (3 readout boards, 120-word events)
// with behavioural ASICs on every module slot. Four events run through the whole cycle
// (trigger, readout request, IPbus readout, ASIC reset, ReadoutDone, re-arm). Board 1 has
// modules missing (zero fill) and board 2 a DATA oRM with no module (stream disabled). The
// test also drops a trigger during readout, blocks one through the sync board's SPI Disable,
// and checks that every board's trigger time-stamp agrees. Each mechanism is counted and
// must occur at least once.
`timescale 1ns/1ps
module tb_hgcal_daq;
  import hgc_pkg::*;
  localparam int NRB = 3, EW = 120, DEPTH = 128;
  logic clk = 0, rst = 1, ext = 0, trig_copy, waiting;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0, n_trig_seen = 0;
  logic [7:0] mod_mask [NRB];

  logic [0:0] s_sclk, s_mosi, s_miso; logic [0:0][0:0] s_cs;
  logic [NRB-1:0] r_sclk, r_mosi, r_miso; logic [NRB-1:0][4:0] r_cs;
  ipb_wbus_t [NRB-1:0] w; ipb_rbus_t [NRB-1:0] r;
  logic [NRB-1:0][7:0] a_trig, a_rst, a_rd;
  logic [NRB-1:0][7:0][3:0] a_dout;
  logic [NRB-1:0] rdone;

  hgcal_daq #(.N_RDOUT(NRB), .DEPTH(DEPTH), .EVENT_WORDS(EW)) dut (
    .clk, .rst, .ext_trig_i(ext), .trig_copy_o(trig_copy), .waiting_o(waiting),
    .sync_spi_sclk(s_sclk[0]), .sync_spi_cs_n(s_cs[0][0]), .sync_spi_mosi(s_mosi[0]), .sync_spi_miso(s_miso[0]),
    .rb_spi_sclk(r_sclk), .rb_spi_cs_n(r_cs), .rb_spi_mosi(r_mosi), .rb_spi_miso(r_miso),
    .ipb_w(w), .ipb_r(r), .asic_trig_o(a_trig), .asic_rst_o(a_rst), .asic_rd_o(a_rd),
    .asic_dout_i(a_dout), .readout_done_o(rdone));

  pi_spi_model #(.NBUS(1), .NCS(1)) pi_sync (.sclk(s_sclk), .cs_n(s_cs), .mosi(s_mosi), .miso(s_miso));
  pi_spi_model #(.NBUS(NRB), .NCS(5)) pi_rb (.sclk(r_sclk), .cs_n(r_cs), .mosi(r_mosi), .miso(r_miso));
  ipb_master_model #(.NBUS(NRB)) ipb (.clk, .w, .r);

  for (genvar b = 0; b < NRB; b++) begin : g_b
    for (genvar m = 0; m < 8; m++) begin : g_m
      for (genvar a = 0; a < 4; a++) begin : g_a
        skiroc2cms_model #(.CHIP(tb_pkg::chip_id(b, m, a))) u_sk (.clk, .trig(a_trig[b][m]),
          .rst(a_rst[b][m]), .rd(a_rd[b][m]), .dout(a_dout[b][m][3-a]));
      end
    end
  end

  always @(posedge clk) if (!rst && trig_copy) n_trig_seen++;

  `include "daq_seq.svh"

  initial begin
    #(50ms); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    mod_mask[0] = 8'hFF; mod_mask[1] = 8'b0101_1111; mod_mask[2] = 8'b0011_1111;
    repeat (4) @(posedge clk); rst <= 0; repeat (4) @(posedge clk);
    configure();
    for (int ev = 1; ev <= 4; ev++) run_event(ev, ev == 2);
    // SPI Disable on the sync board blocks the trigger
    begin
      automatic int t0 = n_trig_seen;
      pi_sync.write(0, 0, 0, 32'h1);
      pulse_ext(100); #(300ns);
      chk("disabled: no trigger", n_trig_seen - t0, 0);
      if (n_trig_seen == t0) n_disabled_drop++;
      pi_sync.write(0, 0, 0, 32'h0);
    end
    run_event(5, 0);
    $display("mechanisms: accepted=%0d dropped_busy=%0d disabled=%0d zero_fill=%0d stream_off=%0d err_empty=%0d ts_checks=%0d",
             n_accepted, n_dropped_busy, n_disabled_drop, n_zero_fill, n_stream_off, n_err_empty, n_ts_checked);
    chk("mechanism accepted trigger", n_accepted > 0, 1);
    chk("mechanism trigger dropped while busy", n_dropped_busy > 0, 1);
    chk("mechanism SPI disable", n_disabled_drop > 0, 1);
    chk("mechanism zero fill", n_zero_fill > 0, 1);
    chk("mechanism stream disabled", n_stream_off > 0, 1);
    chk("mechanism empty FIFO error", n_err_empty > 0, 1);
    chk("mechanism time-stamp check", n_ts_checked > 0, 1);
    $display("longest event cycle: %0d clocks (%0d us)", max_cycle_clks, max_cycle_clks / 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
