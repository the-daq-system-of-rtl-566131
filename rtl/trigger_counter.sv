// trigger_counter: the CTL oRM's "Trigger Counter".
//
// Counts the trigger pulses a readout board has received since the last configuration. The DAQ
// server polls it over IPbus: a change of the count tells it that a new event is on its way.
// clr_i (the configuration pulse from the Pi) zeroes it; a clear and a trigger in the same
// clock give a count of 1. The count wraps at 2**W. Width and clear are this design's choices.
module trigger_counter #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         clr_i,
  input  logic         trig_i,
  output logic [W-1:0] count_o
);
  always_ff @(posedge clk) begin
    if (rst || clr_i) count_o <= W'(trig_i);
    else if (trig_i)  count_o <= count_o + W'(1);
  end
endmodule
