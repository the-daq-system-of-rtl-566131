// tb_hexaboard_fpga: one module FPGA reading four behavioural Skiroc2-CMS ASICs. For several
// events it checks every byte against the published byte format (header 1000, one bit of each
// ASIC), that exactly N_BITS bytes come at one byte per clock, the first one 2 clocks after the
// request, and that an ASIC reset aborts a transfer. N_BITS is reduced to keep the run short.
`timescale 1ns/1ps
module tb_hexaboard_fpga;
  import tb_pkg::*;
  localparam int NB = 1000;
  logic clk = 0, rst = 1, trig = 0, rdreq = 0, hrst = 0;
  logic atrig, arst, ard, valid, busy;
  logic [3:0] dout;
  logic [7:0] data;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  hexaboard_fpga #(.N_BITS(NB)) dut (.clk, .rst, .trig_i(trig), .readout_i(rdreq), .reset_i(hrst),
    .asic_trig_o(atrig), .asic_rst_o(arst), .asic_rd_o(ard), .asic_dout_i(dout),
    .tx_valid_o(valid), .tx_data_o(data), .busy_o(busy));
  for (genvar a = 0; a < 4; a++) begin : g_asic
    skiroc2cms_model #(.CHIP(chip_id(0, 0, a))) u_sk (.clk, .trig(atrig), .rst(arst), .rd(ard), .dout(dout[3-a]));
  end
  always @(posedge clk) cyc++;
  initial begin
    #(5ms); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk); rst <= 0; repeat (2) @(posedge clk);
    for (int ev = 1; ev <= 3; ev++) begin
      int n, c0, first, last;
      trig <= 1; @(posedge clk); trig <= 0; repeat (5) @(posedge clk);
      rdreq <= 1; @(posedge clk); c0 = cyc; rdreq <= 0;
      n = 0; first = -1;
      while (n < NB && cyc < c0 + NB + 20) begin
        @(posedge clk); #1;
        if (valid) begin
          if (first < 0) first = cyc - c0;
          last = cyc - c0;
          checks++;
          if (data !== exp_hb_byte(0, 0, ev, n)) begin
            failures++; if (failures < 10) $display("FAIL ev %0d byte %0d: %h vs %h", ev, n, data, exp_hb_byte(0, 0, ev, n));
          end
          n++;
        end
      end
      repeat (3) @(posedge clk); #1;
      checks++; if (n != NB) begin failures++; $display("FAIL %0d bytes", n); end
      checks++; if (first != 2) begin failures++; $display("FAIL first byte after %0d clocks", first); end
      checks++; if (last - first + 1 != NB) begin failures++; $display("FAIL %0d bytes took %0d clocks", NB, last - first + 1); end
      checks++; if (busy || valid) begin failures++; $display("FAIL still busy"); end
    end
    // abort by reset
    trig <= 1; @(posedge clk); trig <= 0; repeat (3) @(posedge clk);
    rdreq <= 1; @(posedge clk); rdreq <= 0; repeat (50) @(posedge clk);
    hrst <= 1; @(posedge clk); hrst <= 0; repeat (2) @(posedge clk); #1;
    checks++; if (busy || valid) begin failures++; $display("FAIL reset did not abort"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
