// pi_spi_model: SPI master standing in for the boards' Raspberry Pis in the testbenches.
//
// NBUS independent SPI buses (one per board), each with NCS chip selects. write(bus, cs, addr,
// data) and read(bus, cs, addr, data) send one 40-bit frame (write bit, 7-bit address, 32 data
// bits, MSB first, SPI mode 0). SCLK half period is HALF_NS nanoseconds, slow against the 40 MHz
// clock that oversamples it in the slaves.
module pi_spi_model #(
  parameter int unsigned NBUS    = 1,
  parameter int unsigned NCS     = 1,
  parameter int unsigned HALF_NS = 200
) (
  output logic [NBUS-1:0]          sclk,
  output logic [NBUS-1:0][NCS-1:0] cs_n,
  output logic [NBUS-1:0]          mosi,
  input  logic [NBUS-1:0]          miso
);
  initial begin sclk = '0; cs_n = '1; mosi = '0; end

  task automatic xfer(input int bus, input int cs, input logic wr, input logic [6:0] addr,
                      input logic [31:0] wdata, output logic [31:0] rdata);
    logic [39:0] f;
    f = {wr, addr, wdata};
    rdata = '0;
    cs_n[bus][cs] = 1'b0;
    #(HALF_NS * 1ns);
    for (int i = 39; i >= 0; i--) begin
      mosi[bus] = f[i];
      #(HALF_NS * 1ns);
      sclk[bus] = 1'b1;
      if (i < 32) rdata[i] = miso[bus];
      #(HALF_NS * 1ns);
      sclk[bus] = 1'b0;
    end
    #(HALF_NS * 1ns);
    cs_n[bus][cs] = 1'b1;
    #(2 * HALF_NS * 1ns);
  endtask

  task automatic write(input int bus, input int cs, input logic [6:0] addr, input logic [31:0] data);
    logic [31:0] dummy;
    xfer(bus, cs, 1'b1, addr, data, dummy);
  endtask

  task automatic read(input int bus, input int cs, input logic [6:0] addr, output logic [31:0] data);
    xfer(bus, cs, 1'b0, addr, 32'h0, data);
  endtask
endmodule
