// tb_data_orm: one DATA oRM with two module FPGAs and eight behavioural ASICs.
// Per event: trigger, check the pending-trigger status over SPI, request readout over SPI,
// collect the 16-bit stream under random back-pressure and compare each word with
// {byte of module A, byte of module B} from the reference format; check the byte counters
// read over SPI. A second phase disables module B and expects 8'h00 in its byte.
`timescale 1ns/1ps
module tb_data_orm;
  import tb_pkg::*;
  localparam int NB = 300, DEPTH = 512;
  logic clk = 0, rst = 1, trig = 0, ready = 0;
  always #12.5 clk = ~clk;
  logic sclk, mosi, miso; logic [0:0][0:0] cs_n;
  logic [1:0] hb_trig, hb_rd, hb_rst, hb_busy, hb_valid;
  logic [1:0][7:0] hb_data;
  logic [1:0] atrig, arst, ard;
  logic [1:0][3:0] dout;
  logic tx_valid; logic [15:0] tx_data;
  int checks = 0, failures = 0;

  data_orm #(.DEPTH(DEPTH)) dut (.clk, .rst, .trig_i(trig), .spi_sclk(sclk), .spi_cs_n(cs_n[0][0]),
    .spi_mosi(mosi), .spi_miso(miso), .hb_trig_o(hb_trig), .hb_readout_o(hb_rd), .hb_reset_o(hb_rst),
    .hb_busy_i(hb_busy), .hb_valid_i(hb_valid), .hb_data_i(hb_data),
    .tx_valid_o(tx_valid), .tx_data_o(tx_data), .tx_ready_i(ready));
  pi_spi_model #(.NBUS(1), .NCS(1)) pi (.sclk(sclk), .cs_n(cs_n), .mosi(mosi), .miso(miso));

  for (genvar m = 0; m < 2; m++) begin : g_hb
    hexaboard_fpga #(.N_BITS(NB)) u_hb (.clk, .rst, .trig_i(hb_trig[m]), .readout_i(hb_rd[m]),
      .reset_i(hb_rst[m]), .asic_trig_o(atrig[m]), .asic_rst_o(arst[m]), .asic_rd_o(ard[m]),
      .asic_dout_i(dout[m]), .tx_valid_o(hb_valid[m]), .tx_data_o(hb_data[m]), .busy_o(hb_busy[m]));
    for (genvar a = 0; a < 4; a++) begin : g_sk
      skiroc2cms_model #(.CHIP(chip_id(0, m, a))) u_sk (.clk, .trig(atrig[m]), .rst(arst[m]),
        .rd(ard[m]), .dout(dout[m][3-a]));
    end
  end

  task automatic chk(input string w, input logic [31:0] got, input logic [31:0] exp);
    checks++; if (got !== exp) begin failures++; if (failures < 20) $display("FAIL %s: %h vs %h", w, got, exp); end
  endtask

  initial begin
    #(20ms); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] r;
    repeat (3) @(posedge clk); rst <= 0; repeat (3) @(posedge clk);
    pi.write(0, 0, 0, 32'h3);
    for (int ev = 1; ev <= 4; ev++) begin
      logic [1:0] en;
      int n;
      en = (ev >= 3) ? 2'b01 : 2'b11;
      if (ev == 3) pi.write(0, 0, 0, 32'h1);
      @(posedge clk); trig <= 1; @(posedge clk); trig <= 0;
      repeat (10) @(posedge clk);
      pi.read(0, 0, 7'h41, r); chk("trigger pending", r[1:0], 2'b11);
      pi.write(0, 0, 1, 32'h1);             // readout request
      // collect with a clean loop
      n = 0;
      while (n < NB) begin
        @(negedge clk);
        ready = ($urandom_range(0, 3) != 0);
        if (tx_valid && ready) begin
          chk($sformatf("ev %0d word %0d", ev, n), tx_data,
              {exp_hb_byte(0, 0, ev, n), en[1] ? exp_hb_byte(0, 1, ev, n) : 8'h00});
          n++;
        end
      end
      @(negedge clk); ready = 0;
      repeat (5) @(posedge clk); #1;
      chk("stream drained", tx_valid, 0);
      pi.read(0, 0, 7'h40, r);
      chk("bytes A", r[15:0], NB); chk("bytes B", r[31:16], en[1] ? NB : 0);
      pi.write(0, 0, 1, 32'h2);             // ASIC reset
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
