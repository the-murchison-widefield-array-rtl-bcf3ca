// mwa_pkg: constants and types shared by the MWA correlator data path.
//
// The numbers below are the sizes of the deployed 128-tile system: four
// second-stage filterbank (PFB) boards, each driving eight serial output lanes,
// 132-word lane packets that carry one time sample of four 10 kHz channels for
// the 64 inputs (32 dual-polarisation tiles) of one PFB, and 24 correlation
// (XMAC) nodes, one per 1.28 MHz coarse channel. Module parameters default to
// these values; testbenches shrink them.
//
// Lane packet layout (16-bit words):
//   word 0       header, always 16'h0800
//   word 1       {pfb_id[15:14], mgt_id[13:11], mgt_bank[10:6], 2'b0, 3'b0, sec_tick[0]}
//   word 2       {mgt_channel[15:11], mgt_group[10:9], mgt_frame[8:0]}
//   words 3..130 antenna data, two 8-bit (4-bit real, 4-bit imaginary) samples per word
//   word 131     XOR of the 128 data words
// The position of sec_tick (bit 0 of word 1) and the field names and ranges follow
// the published interface; the exact bit positions of the other fields are this
// design's choice. mgt_frame is given nine bits because it counts to 499.
package mwa_pkg;

  // ---- system sizes (defaults) ----
  localparam int unsigned NPFB        = 4;    // PFB boards
  localparam int unsigned NFIBRE      = 12;   // receiver fibres into one PFB board
  localparam int unsigned NMGT        = 8;    // output lanes per PFB board
  localparam int unsigned NIN         = 64;   // inputs (tile x pol) carried by one packet
  localparam int unsigned NF2         = 4;    // fine channels per packet
  localparam int unsigned NGROUP      = 4;    // 40 kHz packet groups per 160 kHz lane channel
  localparam int unsigned NCOARSE     = 24;   // coarse channels (mgt_channel values)
  localparam int unsigned NFRAME      = 500;  // time samples in one 50 ms bank
  localparam int unsigned NBANK       = 20;   // 50 ms banks per second
  localparam int unsigned NEP         = 24;   // XMAC endpoints
  localparam int unsigned ALIGN_DEPTH = 16;   // PFB input alignment buffer (+/-8 samples)

  localparam logic [15:0] PKT_HEADER  = 16'h0800;
  localparam int unsigned SEC_W       = 16;   // width of the UTC-second label carried with data
  localparam int unsigned WIDX_W      = 8;    // word index inside a packet's data (up to 256 words)

  // ---- decoded packet header ----
  typedef struct packed {
    logic       sec_tick;
    logic [1:0] pfb_id;
    logic [2:0] mgt_id;
    logic [4:0] mgt_bank;
    logic [4:0] mgt_channel;
    logic [1:0] mgt_group;
    logic [8:0] mgt_frame;
  } pkt_hdr_t;

  // One data word of a checked packet, as it leaves the capture stage.
  typedef struct packed {
    pkt_hdr_t          hdr;
    logic [SEC_W-1:0]  sec;    // UTC second this packet belongs to
    logic [WIDX_W-1:0] widx;   // index of the word within the packet data
    logic              last;   // last data word of the packet
    logic [15:0]       data;   // two samples: [15:8] first input, [7:0] second input
  } vcs_word_t;

  function automatic logic [15:0] hdr_word1(pkt_hdr_t h);
    return {h.pfb_id, h.mgt_id, h.mgt_bank, 5'b0, h.sec_tick};
  endfunction

  function automatic logic [15:0] hdr_word2(pkt_hdr_t h);
    return {h.mgt_channel, h.mgt_group, h.mgt_frame};
  endfunction

  function automatic pkt_hdr_t hdr_decode(logic [15:0] w1, logic [15:0] w2);
    pkt_hdr_t h;
    h.sec_tick    = w1[0];
    h.pfb_id      = w1[15:14];
    h.mgt_id      = w1[13:11] & 3'h7;
    h.mgt_bank    = w1[10:6];
    h.mgt_channel = w2[15:11];
    h.mgt_group   = w2[10:9];
    h.mgt_frame   = w2[8:0];
    return h;
  endfunction

endpackage
