// tb_spi_if: self-checking testbench of the SPI register interface.
// Writes random values to every control register, checks the registers and the one-clock write
// pulses, reads back control and status words over MISO, and checks that a frame cut short
// (CS_N released early) writes nothing.
`timescale 1ns/1ps
module tb_spi_if;
  localparam int NREGS = 4;
  logic clk = 0, rst = 1;
  always #12.5 clk = ~clk;
  logic sclk, mosi, miso;
  logic [0:0] cs_n;
  logic [NREGS-1:0][31:0] ctrl, stat;
  logic [NREGS-1:0] wr;
  int checks = 0, failures = 0;
  int pulses [NREGS];

  spi_if #(.NREGS(NREGS)) dut (.clk, .rst, .spi_sclk(sclk), .spi_cs_n(cs_n[0]), .spi_mosi(mosi),
    .spi_miso(miso), .ctrl_o(ctrl), .wr_pulse_o(wr), .stat_i(stat));
  pi_spi_model #(.NBUS(1), .NCS(1)) pi (.sclk(sclk), .cs_n(cs_n), .mosi(mosi), .miso(miso));

  always @(posedge clk) if (!rst) for (int i = 0; i < NREGS; i++) if (wr[i]) pulses[i]++;

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  initial begin
    #(2ms);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] v [NREGS];
    logic [31:0] r;
    for (int i = 0; i < NREGS; i++) begin pulses[i] = 0; stat[i] = $urandom; end
    repeat (4) @(posedge clk); rst = 0;
    repeat (4) @(posedge clk);
    for (int i = 0; i < NREGS; i++) begin
      v[i] = $urandom;
      pi.write(0, 0, 7'(i), v[i]);
    end
    for (int i = 0; i < NREGS; i++) begin
      check($sformatf("ctrl[%0d]", i), ctrl[i], v[i]);
      check($sformatf("pulses[%0d]", i), pulses[i], 1);
    end
    for (int i = 0; i < NREGS; i++) begin
      pi.read(0, 0, 7'(i), r);          check($sformatf("read ctrl %0d", i), r, v[i]);
      pi.read(0, 0, 7'(i) | 7'h40, r);  check($sformatf("read stat %0d", i), r, stat[i]);
    end
    // reads must not disturb the registers
    for (int i = 0; i < NREGS; i++) check("ctrl after reads", ctrl[i], v[i]);
    // short frame: 20 clocks then CS_N high -> no write
    cs_n[0] = 0; #200;
    for (int k = 0; k < 20; k++) begin mosi = 1; #200; sclk = 1; #200; sclk = 0; end
    #200; cs_n[0] = 1; #1000;
    for (int i = 0; i < NREGS; i++) check("ctrl after short frame", ctrl[i], v[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
