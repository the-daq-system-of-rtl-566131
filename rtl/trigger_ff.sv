// trigger_ff: "Flip-Flop For Trigger", the input register of the Trigger line on every oRM.
//
// The Trigger arrives over an HDMI cable from the sync board. It is registered twice in the
// local 40 MHz domain and its rising edge is turned into a pulse of one clock, so that a level
// held for several cycles still counts as a single trigger. Latency is 2 clock edges from the
// line to trig_o. The block is named in the board's firmware diagram; its edge detection is this
// design's choice.
module trigger_ff (
  input  logic clk,
  input  logic rst,
  input  logic trig_i,
  output logic trig_o
);
  logic [1:0] r;
  always_ff @(posedge clk) begin
    if (rst) r <= '0;
    else     r <= {r[0], trig_i};
  end
  assign trig_o = r[0] & ~r[1];
endmodule
