// hgc_pkg: shared types, sizes and data-format helpers of the HGCAL beam-test DAQ firmware.
//
// The constants follow the event format of the prototype modules: each Skiroc2-CMS ASIC emits
// 1924 16-bit words per event (64 channels x (13 SCA cells x 2 gains + 2 ToA + 2 ToT) plus 4
// trailer words), read bit-serially, so a module of four ASICs sends 1924 x 16 = 30784 bytes,
// each byte holding a 4-bit header 1000 and one bit of every ASIC. The readout board packs the
// four data bits of eight modules into one 32-bit word, so an event is 30784 such words.
//
// Bit numbering: the published formats number bit 0 at the left of a word. Here the left end is
// taken as the most significant bit, so "position p" of a W-bit word is integer bit W-1-p.
//
// The IPbus bus structs mirror the slave bus of the IPbus firmware (strobe/write/address/
// write data in, read data/ack/error out), all synchronous to the 40 MHz system clock.
package hgc_pkg;

  // ---------------- event sizes ----------------
  localparam int unsigned N_CH          = 64;   // channels per Skiroc2-CMS
  localparam int unsigned N_SCA         = 13;   // switched-capacitor array depth
  localparam int unsigned ASIC_WORDS    = N_CH * (2 * N_SCA + 4) + 4;  // 1924
  localparam int unsigned EVENT_BITS    = ASIC_WORDS * 16;             // 30784 bytes per module
  localparam int unsigned ASICS_PER_HB  = 4;    // ASICs per hexaboard (module)
  localparam int unsigned MODS_PER_DORM = 2;    // modules per DATA oRM
  localparam int unsigned N_DORM        = 4;    // DATA oRMs per readout board
  localparam int unsigned MODS_PER_RB   = MODS_PER_DORM * N_DORM;      // 8
  localparam logic [3:0]  HB_HEADER     = 4'b1000;                     // hexaboard byte header

  // ---------------- IPbus slave bus ----------------
  typedef struct packed {
    logic [31:0] ipb_addr;
    logic [31:0] ipb_wdata;
    logic        ipb_strobe;
    logic        ipb_write;
  } ipb_wbus_t;

  typedef struct packed {
    logic [31:0] ipb_rdata;
    logic        ipb_ack;
    logic        ipb_err;
  } ipb_rbus_t;

  // CTL oRM IPbus register addresses (word addresses)
  typedef enum logic [3:0] {
    IPB_STATUS   = 4'd0,  // {.., readout_done, waiting_for_trigger, data_ready}
    IPB_TRIGCNT  = 4'd1,  // triggers since configuration
    IPB_TS_LO    = 4'd2,  // time-stamp of the last trigger, bits 31:0
    IPB_TS_HI    = 4'd3,  // time-stamp of the last trigger, bits 63:32
    IPB_FIFO     = 4'd4,  // event data word; a read pops it
    IPB_NREAD    = 4'd5   // words read from the current event
  } ipb_reg_e;

  // ---------------- Skiroc2-CMS word formats ----------------
  // Data word: position 0..3 = 1,0,0,hit ; positions 4..15 = 12-bit value
  function automatic logic [15:0] sk2_data_word(input logic hit, input logic [11:0] val);
    return {3'b100, hit, val};
  endfunction
  // Trailer words
  function automatic logic [15:0] sk2_roll_word(input logic [12:0] roll);
    return {3'b000, roll};
  endfunction
  function automatic logic [15:0] sk2_ts_msb_word(input logic [13:0] ts);
    return {2'b00, ts};
  endfunction
  function automatic logic [15:0] sk2_ts_lsb_word(input logic [11:0] ts);
    return {3'b000, ts, 1'b0};
  endfunction
  function automatic logic [15:0] sk2_chipid_word(input logic [7:0] id);
    return {8'b1100_0000, id};
  endfunction

  // Hexaboard byte: header 1000 then one bit of ASIC 0..3
  function automatic logic [7:0] hb_byte(input logic [3:0] asic_bits);
    return {HB_HEADER, asic_bits};
  endfunction

  // CTL oRM word: module i occupies positions 4i..4i+3, i.e. bits 31-4i downto 28-4i
  function automatic logic [31:0] ctl_word(input logic [MODS_PER_RB-1:0][7:0] bytes_by_module);
    logic [31:0] w;
    for (int i = 0; i < int'(MODS_PER_RB); i++) w[31-4*i -: 4] = bytes_by_module[i][3:0];
    return w;
  endfunction

endpackage
