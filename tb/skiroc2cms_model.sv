// skiroc2cms_model: behavioural model of the Skiroc2-CMS ASIC's digital readout (not synthesizable
// logic of this design: the real part is a mixed-signal ASIC).
//
// A trigger pulse ends the acquisition of an event: the event counter advances and the serial
// pointer returns to bit 0. dout shows the current bit of the event (1924 sixteen-bit words,
// most significant bit first, content from tb_pkg::sk2_word); a clock edge with rd high moves
// to the next bit. rst returns the pointer to bit 0. The first trigger selects event 1. The first four clock
// edges are ignored, while the FPGA that drives the inputs is still in reset.
module skiroc2cms_model #(
  parameter int unsigned CHIP = 0
) (
  input  logic clk,
  input  logic trig,
  input  logic rst,
  input  logic rd,
  output logic dout
);
  import tb_pkg::*;
  int unsigned evt = 0;
  int unsigned n   = 0;
  int unsigned age = 0;
  always_ff @(posedge clk) begin
    if (age < 4)   age <= age + 1;   // inputs are undefined until the driving FPGA is reset
    else if (trig) begin evt <= evt + 1; n <= 0; end
    else if (rst)  n <= 0;
    else if (rd)   n <= n + 1;
  end
  assign dout = sk2_bit(CHIP, evt, n);
endmodule
