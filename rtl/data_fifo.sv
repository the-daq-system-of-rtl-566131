// data_fifo: the "DataFIFO" buffers of the DATA and CTL oRMs.
//
// A synchronous first-in first-out buffer held in a RAM array (block RAM on the oRM's FPGA).
// The default depth, 32768 words, holds one whole event of a module, 30784 words, so the
// readout never has to stall a module. Read data are shown ahead: rd_data is the oldest word
// whenever empty is low, and rd_en removes it at the clock edge. Writes into a full FIFO and
// reads from an empty one are ignored (and flagged by assertions). flush (the "FIFO_Reset" of
// the CTL oRM) empties the FIFO in one clock and wins over a simultaneous write. count is the
// number of stored words.
module data_fifo #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 32768,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         flush,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         full,
  output logic         empty,
  output logic [AW:0]  count
);
  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;

  wire do_wr = wr_en & ~full;
  wire do_rd = rd_en & ~empty;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst || flush) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + AW'(1);
      if (do_rd) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + AW'(1);
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  assign rd_data = mem[rp];
  assign empty   = (count == '0);
  assign full    = (count == (AW+1)'(DEPTH));

  // The producer and consumer are expected to respect full/empty.
  a_no_overflow:  assert property (@(posedge clk) disable iff (rst || flush) wr_en |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (rst || flush) rd_en |-> !empty);
endmodule
