// tb_sync_board: the sync board with model readout boards that answer each Trigger with
// ReadoutDone after random delays. Checks one Trigger per accepted external trigger, that
// external triggers during a readout cycle are dropped, that WaitingForTrigger returns only
// after the last enabled board is done (disabled boards ignored), that the SPI Disable blocks
// triggers, and the trigger count read over SPI.
`timescale 1ns/1ps
module tb_sync_board;
  localparam int N = 15;
  logic clk = 0, rst = 1, ext = 0, trig, waiting;
  logic [N-1:0] rdone = '0;
  logic [0:0] sclk, mosi, miso; logic [0:0][0:0] cs_n;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0, ntrig = 0, dropped = 0;

  sync_board #(.N_BOARDS(N)) dut (.clk, .rst, .ext_trig_i(ext), .spi_sclk(sclk[0]), .spi_cs_n(cs_n[0][0]),
    .spi_mosi(mosi[0]), .spi_miso(miso[0]), .readout_done_i(rdone), .trig_o(trig), .waiting_o(waiting));
  pi_spi_model #(.NBUS(1), .NCS(1)) pi (.sclk, .cs_n, .mosi, .miso);

  always @(posedge clk) if (!rst && trig) ntrig++;

  task automatic chk(input string wh, input logic [31:0] got, input logic [31:0] exp);
    checks++; if (got !== exp) begin failures++; if (failures < 20) $display("FAIL %s: %0h vs %0h", wh, got, exp); end
  endtask
  task automatic pulse_ext(input int ns);
    ext = 1; #(ns * 1ns); ext = 0;
  endtask

  initial begin
    #(20ms); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] x;
    logic [N-1:0] mask;
    repeat (3) @(posedge clk); rst <= 0; repeat (3) @(posedge clk);
    for (int ev = 0; ev < 12; ev++) begin
      int n0;
      mask = (ev < 4) ? 15'h3FFF : (N'($urandom) | 15'h1);
      pi.write(0, 0, 1, 32'(mask));
      #($urandom_range(10, 200) * 1.37ns);
      n0 = ntrig;
      pulse_ext($urandom_range(20, 200));
      #(200ns);
      chk("one trigger", ntrig - n0, 1);
      chk("waiting low", waiting, 0);
      // a second particle during the readout is dropped
      pulse_ext(60); #(200ns);
      chk("trigger during readout dropped", ntrig - n0, 1);
      // boards answer one by one; the last enabled one re-arms
      for (int b = 0; b < N; b++) begin
        if (!mask[b]) continue;
        #($urandom_range(1, 40) * 25ns);
        chk("still busy", waiting, 0);
        @(negedge clk); rdone[b] = 1; @(negedge clk); rdone[b] = 0;
      end
      repeat (4) @(posedge clk); #1;
      chk("waiting after all done", waiting, 1);
    end
    // disable through SPI
    pi.write(0, 0, 0, 32'h1);
    chk("waiting low while disabled", waiting, 0);
    begin
      automatic int n0 = ntrig;
      pulse_ext(100); #(300ns);
      chk("disabled: no trigger", ntrig - n0, 0);
      pi.write(0, 0, 0, 32'h0);
      pulse_ext(100); #(300ns);
      chk("enabled again", ntrig - n0, 1);
    end
    pi.read(0, 0, 7'h41, x); chk("trigger count", x, ntrig);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
