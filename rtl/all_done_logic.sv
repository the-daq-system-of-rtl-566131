// all_done_logic: the sync oRM's "All_Done Logic".
//
// Each readout board answers a trigger with ReadoutDone once its event has been read and its
// modules re-armed. This block keeps one sticky flag per board input (Readout Done[14:0]); a
// trigger clears all flags, a high ReadoutDone sets its board's flag. Done is high when every
// board enabled in board_mask_i has its flag set, and stays high until the next trigger. The mask
// lets fewer than 15 boards be connected (14 were used); it is this design's addition. Done is
// registered: it rises one clock after the last ReadoutDone is seen.
module all_done_logic #(
  parameter int unsigned N_BOARDS = 15
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                trig_i,
  input  logic [N_BOARDS-1:0] readout_done_i,
  input  logic [N_BOARDS-1:0] board_mask_i,
  output logic                done_o
);
  logic [N_BOARDS-1:0] seen;
  always_ff @(posedge clk) begin
    if (rst || trig_i) seen <= '0;
    else               seen <= seen | readout_done_i;
  end
  always_ff @(posedge clk) begin
    if (rst || trig_i) done_o <= 1'b0;
    else               done_o <= &(seen | ~board_mask_i);
  end
endmodule
