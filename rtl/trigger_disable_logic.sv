// trigger_disable_logic: the sync oRM's "Trigger Disable Logic".
//
// A two-state machine closes the trigger gate for the whole readout cycle. In WAIT the sync
// board accepts a trigger; the accepted trigger moves it to BUSY, where Trigger Disable is held
// high towards the Global Trigger Flip-Flop and WaitingForTrigger is low towards the readout
// boards. When the All_Done Logic reports that every readout board has sent ReadoutDone, it
// returns to WAIT. The Pi can also close the gate at any time through the SPI Disable bit;
// WaitingForTrigger is then low as well. Outputs are registered: WaitingForTrigger falls one
// clock after the trigger pulse. The wait/readout/re-arm sequence follows the sync board's
// described operation; the state encoding and reset state are this design's.
module trigger_disable_logic (
  input  logic clk,
  input  logic rst,
  input  logic trig_i,
  input  logic done_i,
  input  logic disable_i,
  output logic trig_disable_o,
  output logic waiting_o
);
  typedef enum logic {ST_WAIT, ST_BUSY} state_e;
  state_e st;

  always_ff @(posedge clk) begin
    if (rst) st <= ST_WAIT;
    else case (st)
      ST_WAIT: if (trig_i)  st <= ST_BUSY;
      ST_BUSY: if (done_i && !trig_i) st <= ST_WAIT;
      default: st <= ST_WAIT;
    endcase
  end

  assign trig_disable_o = (st == ST_BUSY) | disable_i;
  assign waiting_o      = (st == ST_WAIT) & ~disable_i;
endmodule
