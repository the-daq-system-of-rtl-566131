// global_trigger_ff: the sync board's "Global Trigger Flip-Flop".
//
// The external trigger (a coincidence of two scintillators) is not synchronous with the 40 MHz
// system clock. It passes two flip-flops to settle metastability, and a rising edge of the
// synchronized level becomes a Trigger pulse of exactly one clock, the signal sent to all
// readout boards. While trig_disable_i is high (readout in progress, or disabled by the Pi)
// edges are dropped rather than held, so a particle during readout never makes a late trigger.
// Latency: the pulse appears 3 clock edges after the input rises. Synchronizing to the system
// clock is the board's documented behaviour; the pulse length and drop-while-disabled rule are
// this design's choices.
module global_trigger_ff (
  input  logic clk,
  input  logic rst,
  input  logic ext_trig_i,
  input  logic trig_disable_i,
  output logic trig_o
);
  logic [2:0] s;
  always_ff @(posedge clk) begin
    if (rst) begin
      s <= '0; trig_o <= 1'b0;
    end else begin
      s      <= {s[1:0], ext_trig_i};
      trig_o <= s[1] & ~s[2] & ~trig_disable_i;
    end
  end
endmodule
