// mwa_correlator: the digital data path of the MWA hybrid FX correlator, from
// the receiver fibres arriving at the filterbank boards to the visibility
// records handed to the archive.
//
// Signal path:
//   receiver fibres -> pfb_input_align (one per PFB board)
//     -> [second-stage polyphase filterbank: not part of this RTL; its input and
//         output are ports of this module]
//     -> pfb_packetiser (one per output lane, P_NPFB*P_NMGT lanes)
//     -> vcs_capture -> vcs_demux (one pair per lane, as on the capture hosts)
//     -> cross_connect (the Ethernet switch, any lane to any node)
//     -> xmac_node (one per node: assembly buffer, correlation, output framing).
// The lane number is pfb*P_NMGT + mgt and fixes the pfb_id and mgt_id written
// into its packets. With the defaults this is the 128-tile, dual-polarisation,
// 3072-channel system: four boards of twelve fibres, 32 lanes and 24 nodes, each
// node correlating 128 stations over 128 fine channels every second. The
// decomposition follows the published system; the handshakes between the
// stages are this design's.
//
// Interface: fibre words in (fib_*); aligned fibre words out to the filterbank
// (pfb_in_*); channelised lane words in from the filterbank on ch_valid/ch_ready;
// one archive stream per node out (arc_*); per-lane and per-node status counters.
// fscrunch_log2 (average 1, 2, 4 or 8 fine channels) and half_sec (two
// half-second records per second) set the output mode of every node.
// The lanes send each coarse channel's packets back to back, so all lanes feed
// one node at a time; without the capture hosts' large buffers the filterbank
// side must be paced to the node link (1/NLANE of a lane's peak rate), or the
// capture stages overflow, which they detect, count and recover from.
module mwa_correlator
  import mwa_pkg::*;
#(
  parameter int unsigned P_NPFB    = NPFB,
  parameter int unsigned P_NFIBRE  = NFIBRE,
  parameter int unsigned P_NMGT    = NMGT,
  parameter int unsigned P_NIN     = NIN,
  parameter int unsigned P_NF2     = NF2,
  parameter int unsigned P_NGROUP  = NGROUP,
  parameter int unsigned P_NCOARSE = NCOARSE,
  parameter int unsigned P_NFRAME  = NFRAME,
  parameter int unsigned P_NBANK   = NBANK,
  parameter int unsigned P_NEP     = NEP,
  parameter int unsigned P_DEPTH   = ALIGN_DEPTH,
  localparam int unsigned NLANE    = P_NPFB * P_NMGT
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [1:0]  fscrunch_log2,
  input  logic        half_sec,
  // receiver fibres
  input  logic [15:0] fib_data  [P_NPFB][P_NFIBRE],
  input  logic        fib_tick  [P_NPFB][P_NFIBRE],
  input  logic        fib_valid [P_NPFB][P_NFIBRE],
  // aligned fibre words, to the filterbank
  output logic [15:0] pfb_in_data  [P_NPFB][P_NFIBRE],
  output logic        pfb_in_tick  [P_NPFB],
  output logic        pfb_in_valid [P_NPFB],
  output logic        pfb_aligned  [P_NPFB],
  // channelised output of the filterbank, one stream per lane
  input  logic [15:0] ch_data  [NLANE],
  input  logic        ch_valid [NLANE],
  output logic        ch_ready [NLANE],
  // archive streams, one per node
  output logic [31:0] arc_data  [P_NEP],
  output logic        arc_valid [P_NEP],
  input  logic        arc_ready [P_NEP],
  output logic        arc_sop   [P_NEP],
  output logic        arc_eop   [P_NEP],
  // status
  output logic        lane_synced  [NLANE],
  output logic [15:0] lane_good    [NLANE],
  output logic [15:0] lane_csum    [NLANE],
  output logic [15:0] lane_seq     [NLANE],
  output logic [15:0] lane_unsync  [NLANE],
  output logic [15:0] lane_ovf     [NLANE],
  output logic [15:0] node_blocks  [P_NEP],
  output logic [15:0] node_stall   [P_NEP],
  output logic [15:0] node_resync  [P_NEP],
  output logic [15:0] node_late    [P_NEP],
  output logic [15:0] pfb_realign  [P_NPFB]
);
  localparam int unsigned DEST_W = (P_NEP > 1) ? $clog2(P_NEP) : 1;

  // ---------------- PFB input buffers ----------------
  for (genvar p = 0; p < P_NPFB; p++) begin : g_pfb
    pfb_input_align #(.P_NFIBRE(P_NFIBRE), .P_DEPTH(P_DEPTH), .P_W(16)) u_align (
      .clk, .rst_n,
      .in_data (fib_data[p]), .in_tick(fib_tick[p]), .in_valid(fib_valid[p]),
      .out_data(pfb_in_data[p]), .out_tick(pfb_in_tick[p]), .out_valid(pfb_in_valid[p]),
      .aligned (pfb_aligned[p]), .n_realign(pfb_realign[p])
    );
  end

  // ---------------- lanes: framing, capture, routing ----------------
  vcs_word_t         dm_word  [NLANE];
  logic [DEST_W-1:0] dm_dest  [NLANE];
  logic              dm_valid [NLANE];
  logic              dm_ready [NLANE];

  for (genvar l = 0; l < NLANE; l++) begin : g_lane
    logic [15:0] lane_data;
    logic        lane_valid;
    vcs_word_t   cap_word;
    logic        cap_valid, cap_ready;
    logic [15:0] n_unroutable;

    pfb_packetiser #(
      .P_NIN(P_NIN), .P_NF2(P_NF2), .P_NGROUP(P_NGROUP), .P_NCOARSE(P_NCOARSE),
      .P_NFRAME(P_NFRAME), .P_NBANK(P_NBANK)
    ) u_pkt (
      .clk, .rst_n,
      .pfb_id(2'(l / P_NMGT)), .mgt_id(3'(l % P_NMGT)),
      .in_data(ch_data[l]), .in_valid(ch_valid[l]), .in_ready(ch_ready[l]),
      .lane_data, .lane_valid
    );

    vcs_capture #(
      .P_NIN(P_NIN), .P_NF2(P_NF2), .P_NGROUP(P_NGROUP), .P_NCOARSE(P_NCOARSE),
      .P_NFRAME(P_NFRAME), .P_NBANK(P_NBANK)
    ) u_cap (
      .clk, .rst_n, .lane_data, .lane_valid,
      .out_word(cap_word), .out_valid(cap_valid), .out_ready(cap_ready),
      .synced(lane_synced[l]), .n_good(lane_good[l]), .n_csum_err(lane_csum[l]),
      .n_seq_err(lane_seq[l]), .n_unsync(lane_unsync[l]), .n_overflow(lane_ovf[l])
    );

    vcs_demux #(.P_NCOARSE(P_NCOARSE), .P_NEP(P_NEP)) u_dmx (
      .clk, .rst_n,
      .in_word(cap_word), .in_valid(cap_valid), .in_ready(cap_ready),
      .out_word(dm_word[l]), .out_dest(dm_dest[l]), .out_valid(dm_valid[l]),
      .out_ready(dm_ready[l]), .n_unroutable
    );
  end

  // ---------------- cross-connect ----------------
  vcs_word_t xc_word  [P_NEP];
  logic      xc_valid [P_NEP];
  logic      xc_ready [P_NEP];

  cross_connect #(.P_NLANE(NLANE), .P_NEP(P_NEP)) u_xc (
    .clk, .rst_n,
    .in_word(dm_word), .in_dest(dm_dest), .in_valid(dm_valid), .in_ready(dm_ready),
    .out_word(xc_word), .out_valid(xc_valid), .out_ready(xc_ready)
  );

  // ---------------- correlation nodes ----------------
  for (genvar e = 0; e < P_NEP; e++) begin : g_node
    xmac_node #(
      .P_NIN(P_NIN), .P_NF2(P_NF2), .P_NGROUP(P_NGROUP), .P_NMGT(P_NMGT),
      .P_NPFB(P_NPFB), .P_NCC(P_NCOARSE / P_NEP), .P_NFRAME(P_NFRAME), .P_NBANK(P_NBANK)
    ) u_node (
      .clk, .rst_n, .fscrunch_log2, .half_sec,
      .in_word(xc_word[e]), .in_valid(xc_valid[e]), .in_ready(xc_ready[e]),
      .out_data(arc_data[e]), .out_valid(arc_valid[e]), .out_ready(arc_ready[e]),
      .out_sop(arc_sop[e]), .out_eop(arc_eop[e]),
      .n_blocks(node_blocks[e]), .n_stall(node_stall[e]),
      .n_resync(node_resync[e]), .n_late(node_late[e])
    );
  end
endmodule
