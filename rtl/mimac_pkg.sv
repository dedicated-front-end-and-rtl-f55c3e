// mimac_pkg: constants and word formats shared by the MIMAC readout RTL.
//
// Every slice of the detector is 20 ns: the comparators are sampled at 50 MHz
// and serialized at 400 MHz, so one slice is 8 cycles of the 400 MHz bit clock.
// The whole design runs on that bit clock; the 50 MHz sample clock appears as a
// one-cycle-in-eight enable.
//
// Formats:
//  * raw position memory word (18 bits, width from the paper, layout chosen here):
//      bit 17 = 1 : time-tag word, bits 12..0 = start time of the record
//      bit 17 = 0 : data word, bits 15..0 = hit pattern of one slice
//  * position word (16 bits, layout from the paper's encoding table):
//      [15:13]=0, [12]=X(0)/Y(1), [11:10]=ASIC, [9:8]=group, [7:4]=0, [3:0]=channel
//  * FIFO header word (chosen here): {3'b100, time[12:0]}; it cannot be
//    confused with a position word because positions have bits 15..13 at 0.
package mimac_pkg;
  localparam int unsigned TIME_BITS    = 13;   // time counter width
  localparam int unsigned CH_PER_GROUP = 16;   // channels per group
  localparam int unsigned GROUPS       = 4;    // groups per ASIC
  localparam int unsigned CH_PER_ASIC  = 64;
  localparam int unsigned SER_BITS     = 8;    // 400 MHz / 50 MHz
  localparam int unsigned RAW_BITS     = 18;   // raw position memory width
  localparam int unsigned POS_BITS     = 16;

  typedef logic [TIME_BITS-1:0] time_tag_t;
  typedef logic [POS_BITS-1:0]  pos_t;

  // A time-tagged position travelling through the event-building tree.
  typedef struct packed {
    time_tag_t ttag;
    pos_t      pos;
  } hit_t;

  function automatic pos_t encode_pos(input logic side_y, input logic [1:0] asic,
                                      input logic [1:0] grp, input logic [3:0] ch);
    return {3'b000, side_y, asic, grp, 4'b0000, ch};
  endfunction

  function automatic logic [15:0] header_word(input time_tag_t t);
    return {3'b100, t};
  endfunction

  // Age of time tag t relative to the running counter, modulo 2^13.
  function automatic time_tag_t tag_age(input time_tag_t now, input time_tag_t t);
    return now - t;
  endfunction
endpackage
