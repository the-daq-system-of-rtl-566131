// tb_pkg: reference data for the testbenches.
//
// sk2_word() defines the event content that the behavioural Skiroc2-CMS model sends and that
// the checkers expect, so expected bytes and words are computed here, independently of the
// RTL that transports them. The word order follows the published ASIC format: for each of the
// 13 SCA cells, 64 low-gain then 64 high-gain ADC words; then 64 ToA (falling clock), 64 ToA
// (rising clock), 64 ToT (fast ramp), 64 ToT (slow ramp); then roll position, time-stamp MSB,
// time-stamp LSB and chip ID. Values are a hash of (chip, event, word index).
package tb_pkg;
  import hgc_pkg::*;

  function automatic logic [31:0] mix(input int unsigned a, input int unsigned b, input int unsigned c);
    logic [31:0] h;
    h = 32'h9E37_79B9 ^ a;
    h = (h ^ (h >> 15)) * 32'h85EB_CA6B + b;
    h = (h ^ (h >> 13)) * 32'hC2B2_AE35 + c;
    return h ^ (h >> 16);
  endfunction

  function automatic logic [15:0] sk2_word(input int unsigned chip, input int unsigned evt, input int unsigned idx);
    logic [31:0] h;
    h = mix(chip, evt, idx);
    if (idx < N_CH * 2 * N_SCA + 4 * N_CH) return sk2_data_word(h[12], h[11:0]);
    case (idx - (N_CH * 2 * N_SCA + 4 * N_CH))
      0:       return sk2_roll_word(13'(1 << (evt % 13)));
      1:       return sk2_ts_msb_word(h[13:0]);
      2:       return sk2_ts_lsb_word(h[11:0]);
      default: return sk2_chipid_word(chip[7:0]);
    endcase
  endfunction

  // serial bit n of an ASIC's event (word n/16, most significant bit first)
  function automatic logic sk2_bit(input int unsigned chip, input int unsigned evt, input int unsigned n);
    logic [15:0] w;
    w = sk2_word(chip, evt, (n / 16) % ASIC_WORDS);
    return w[15 - (n % 16)];
  endfunction

  function automatic int unsigned chip_id(input int unsigned board, input int unsigned mdl, input int unsigned asic);
    return board * 32 + mdl * 4 + asic;
  endfunction

  // expected hexaboard byte n of module (board, module)
  function automatic logic [7:0] exp_hb_byte(input int unsigned board, input int unsigned mdl,
                                             input int unsigned evt, input int unsigned n);
    logic [3:0] b;
    for (int a = 0; a < 4; a++) b[3-a] = sk2_bit(chip_id(board, mdl, a), evt, n);
    return {4'b1000, b};
  endfunction

  // expected CTL event word n of a board; modules not in mask read as zero
  function automatic logic [31:0] exp_ctl_word(input int unsigned board, input logic [7:0] mask,
                                               input int unsigned evt, input int unsigned n);
    logic [31:0] w;
    w = '0;
    for (int m = 0; m < 8; m++)
      if (mask[m]) w[31 - 4*m -: 4] = exp_hb_byte(board, m, evt, n)[3:0];
    return w;
  endfunction
endpackage
