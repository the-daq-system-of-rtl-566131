// tb_hgcal_daq_full: the DAQ at its full default size, 14 readout boards and full 30784-word
// events, with 94 modules populated as in the last beam test (boards 0-9 with seven modules,
// boards 10-13 with six). Two complete readout cycles; every word of every board is checked
// against the reference format, and the boards' time-stamp differences must agree. The boards
// run their cycles concurrently, and each cycle (trigger to re-armed sync board) must fit the
// 25 ms between triggers of a 40 Hz run.
`timescale 1ns/1ps
module tb_hgcal_daq_full;
  import hgc_pkg::*;
  localparam int NRB = 14, EW = EVENT_BITS;
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

  hgcal_daq dut (
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
    #(400ms); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int nmod = 0;
    for (int b = 0; b < NRB; b++) mod_mask[b] = (b < 10) ? 8'b0111_1111 : 8'b0011_1111;
    foreach (mod_mask[b]) nmod += $countones(mod_mask[b]);
    chk("94 modules populated", nmod, 94);
    repeat (4) @(posedge clk); rst <= 0; repeat (4) @(posedge clk);
    configure();
    run_event(1, 1);
    run_event(2, 0);
    chk("time-stamp comparisons made", n_ts_checked, NRB - 1);
    $display("longest event cycle: %0d clocks (%0d us)", max_cycle_clks, max_cycle_clks / 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
