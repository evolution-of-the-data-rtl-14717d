// Shared types and constants of the STS simple-concentration readout.
//
// A detector word is the 24-bit e-link word of the front-end ASIC. The
// serializer extends it with a source ID to a 32-bit DAQ word:
//   [31:28] GBT-link number, [27:24] e-link number, [23:0] e-link word.
// The 24/32-bit sizes follow the paper; the split of the 8-bit source ID
// into two 4-bit fields is this design's choice. E-link number 15 is never
// used by a real e-link (a group has at most 15, numbered 0..14) and marks
// the filler word that pads a record closed early at a microslice boundary.
//
// The artificial epoch (TS-MSB) marker carries timestamp bits 13..8 three
// times and a 4-bit CRC, as the paper states. The 2-bit header 2'b01 and the
// CRC polynomial x^4+x+1 (MSB first, initial value 0) are assumptions.
package sts_conc_pkg;

  localparam int DATA_W     = 24;
  localparam int ELINK_ID_W = 4;
  localparam int LINK_ID_W  = 4;
  localparam int WORD_W     = LINK_ID_W + ELINK_ID_W + DATA_W;  // 32

  typedef logic [DATA_W-1:0] elink_data_t;

  typedef struct packed {
    logic [LINK_ID_W-1:0]  link;
    logic [ELINK_ID_W-1:0] elink;
    elink_data_t           data;
  } daq_word_t;

  localparam logic [ELINK_ID_W-1:0] FILLER_ELINK = '1;
  localparam daq_word_t FILLER_WORD = '{link: '1, elink: '1, data: '0};

  // Source of one output-record slot when the record is loaded.
  typedef enum logic [1:0] {
    SRC_AUX  = 2'd0,   // word kept from an earlier clock in the aux record
    SRC_NET  = 2'd1,   // word arriving from the network in this clock
    SRC_FILL = 2'd2    // filler word (record closed at a microslice boundary)
  } slot_src_t;

  // CRC-4, polynomial x^4+x+1, MSB first, initial value 0.
  function automatic logic [3:0] crc4(input logic [19:0] bits);
    logic [3:0] c;
    logic       fb;
    c = 4'h0;
    for (int i = 19; i >= 0; i--) begin
      fb = c[3] ^ bits[i];
      c  = {c[2:0], 1'b0} ^ (fb ? 4'b0011 : 4'b0000);
    end
    return c;
  endfunction

  // Artificial TS-MSB marker: {2'b01, ts[13:8] x 3, crc4}.
  function automatic elink_data_t make_epoch_marker(input logic [5:0] ts_msb);
    logic [19:0] body;
    body = {2'b01, ts_msb, ts_msb, ts_msb};
    return {body, crc4(body)};
  endfunction

  // Reverse the low n bits of v.
  function automatic int unsigned bitrev(input int unsigned v, input int n);
    int unsigned r;
    r = 0;
    for (int i = 0; i < n; i++) r |= ((v >> i) & 1) << (n - 1 - i);
    return r;
  endfunction

endpackage
