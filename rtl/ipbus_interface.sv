// ipbus_interface: the CTL oRM's "IPbus Interface", the register and data port read by the DAQ
// server through the IPbus core.
//
// Registers (word address, all read only; writes are acknowledged and ignored):
//     0 STATUS  : {29'b0, ReadoutDone, WaitingForTrigger, data ready}
//     1 TRIGCNT : trigger count from the Trigger Counter
//     2 TS_LO / 3 TS_HI : 64-bit time-stamp of the last trigger, in 40 MHz clocks since the last
//                 configuration pulse
//     4 FIFO    : next 32-bit event word; reading it pops the four CTL DataFIFOs
//     5 NREAD   : event words read since the trigger
// Event words: each CTL DataFIFO (one per DATA oRM) holds 16-bit words {byte of module 2s,
// byte of module 2s+1}. A read of FIFO drops the 4-bit header of each byte and concatenates the
// eight remaining nibbles, module 0 in the most significant nibble, so bit 31-4i-j is ASIC j of
// module i. Modules disabled in mod_en_i read as zero; streams with no enabled module are not
// popped. If an enabled stream is empty the read returns ipb_err and pops nothing.
// "data ready" is set once every enabled stream holds a full event (EVENT_WORDS words) and is
// cleared by the next trigger or while WaitingForTrigger is high (the FIFOs are then flushed). ReadoutDone (to the sync board) rises once all EVENT_WORDS words
// have been read and the Pi has signalled start of acquisition (acq_start_i), in either order,
// and falls at the next trigger.
// Bus timing: the slave acknowledges a strobe one clock later with a single-cycle ipb_ack;
// the master drops the strobe after the ack. The registers' purposes follow the readout
// sequence of the DAQ; addresses, widths and the bit order of the word are this design's
// choices where the published format is silent (bit 0 of the published word is taken as the MSB).
module ipbus_interface
  import hgc_pkg::*;
#(
  parameter int unsigned EVENT_WORDS = EVENT_BITS,
  parameter int unsigned CW          = 16        // width of the FIFO fill counts
) (
  input  logic                 clk,
  input  logic                 rst,
  input  ipb_wbus_t            ipb_w,
  output ipb_rbus_t            ipb_r,
  input  logic                 trig_i,
  input  logic                 cfg_i,
  input  logic                 acq_start_i,
  input  logic                 waiting_i,
  input  logic [7:0]           mod_en_i,
  input  logic [31:0]          trig_count_i,
  input  logic [3:0][15:0]     fifo_data_i,
  input  logic [3:0]           fifo_empty_i,
  input  logic [3:0][CW-1:0]   fifo_count_i,
  output logic                 fifo_rd_o,
  output logic                 readout_done_o
);
  logic [63:0] ts, ts_trig;
  logic [31:0] nread;
  logic        data_ready, acq_seen;
  logic [3:0]  str_en;
  logic        all_full, can_pop, rd_fifo_req;

  for (genvar s = 0; s < 4; s++) begin : g_en
    assign str_en[s] = mod_en_i[2*s] | mod_en_i[2*s+1];
  end

  always_comb begin
    all_full = |str_en;
    can_pop  = |str_en;
    for (int s = 0; s < 4; s++) begin
      if (str_en[s] && int'(fifo_count_i[s]) < int'(EVENT_WORDS)) all_full = 1'b0;
      if (str_en[s] && fifo_empty_i[s])                          can_pop  = 1'b0;
    end
  end

  // event word: drop headers, module i -> bits 31-4i .. 28-4i
  function automatic logic [31:0] build_word(input logic [3:0][15:0] d, input logic [7:0] en);
    logic [MODS_PER_RB-1:0][7:0] b;
    for (int s = 0; s < 4; s++) begin
      b[2*s]   = en[2*s]   ? d[s][15:8] : 8'h00;
      b[2*s+1] = en[2*s+1] ? d[s][7:0]  : 8'h00;
    end
    return ctl_word(b);
  endfunction

  wire access  = ipb_w.ipb_strobe & ~ipb_r.ipb_ack;
  wire is_fifo = (ipb_w.ipb_addr[3:0] == IPB_FIFO) && (ipb_w.ipb_addr[31:4] == '0);
  assign rd_fifo_req = access & ~ipb_w.ipb_write & is_fifo;
  assign fifo_rd_o   = rd_fifo_req & can_pop;

  always_ff @(posedge clk) begin
    if (rst) begin
      ipb_r <= '0;
    end else begin
      ipb_r.ipb_ack <= access;
      ipb_r.ipb_err <= rd_fifo_req & ~can_pop;
      if (access && !ipb_w.ipb_write) begin
        if (ipb_w.ipb_addr[31:4] != '0) ipb_r.ipb_rdata <= '0;
        else case (ipb_w.ipb_addr[3:0])
          IPB_STATUS:  ipb_r.ipb_rdata <= {29'b0, readout_done_o, waiting_i, data_ready};
          IPB_TRIGCNT: ipb_r.ipb_rdata <= trig_count_i;
          IPB_TS_LO:   ipb_r.ipb_rdata <= ts_trig[31:0];
          IPB_TS_HI:   ipb_r.ipb_rdata <= ts_trig[63:32];
          IPB_FIFO:    ipb_r.ipb_rdata <= can_pop ? build_word(fifo_data_i, mod_en_i) : '0;
          IPB_NREAD:   ipb_r.ipb_rdata <= nread;
          default:     ipb_r.ipb_rdata <= '0;
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ts <= '0; ts_trig <= '0; nread <= '0; data_ready <= 1'b0; acq_seen <= 1'b0;
      readout_done_o <= 1'b0;
    end else begin
      ts <= cfg_i ? 64'd0 : ts + 64'd1;
      if (cfg_i)       ts_trig <= '0;
      else if (trig_i) ts_trig <= ts;
      if (trig_i) begin
        nread <= '0; data_ready <= 1'b0; acq_seen <= 1'b0; readout_done_o <= 1'b0;
      end else begin
        if (fifo_rd_o)   nread <= nread + 32'd1;
        if (waiting_i)     data_ready <= 1'b0;
        else if (all_full) data_ready <= 1'b1;
        if (acq_start_i) acq_seen <= 1'b1;
        if ((acq_seen || acq_start_i) && nread == 32'(EVENT_WORDS)) readout_done_o <= 1'b1;
      end
    end
  end

  a_ack_one_cycle: assert property (@(posedge clk) disable iff (rst) ipb_r.ipb_ack |=> !ipb_r.ipb_ack);
endmodule
