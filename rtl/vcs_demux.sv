// vcs_demux: chooses the correlation (XMAC) node for each packet of a lane.
//
// Every packet carries its coarse channel in mgt_channel; a static routing table,
// fixed at elaboration, maps coarse channels to nodes so that each node receives
// a contiguous run of coarse channels (P_NCOARSE/P_NEP of them) from every lane.
// With the default 24 channels and 24 nodes, node c receives coarse channel c,
// that is 128 contiguous 10 kHz channels from all lanes. Routing on the packet
// header and a static table follow the published design; building the table as
// contiguous equal shares is this design's choice. A packet whose mgt_channel is
// outside the table is consumed and counted, not forwarded.
//
// Interface: data words in on in_valid/in_ready, out on out_valid/out_ready with
// the destination node number out_dest beside them (combinational, no latency);
// out_dest is constant for all words of a packet.
module vcs_demux
  import mwa_pkg::*;
#(
  parameter int unsigned P_NCOARSE = NCOARSE,
  parameter int unsigned P_NEP     = NEP,
  localparam int unsigned DEST_W   = (P_NEP > 1) ? $clog2(P_NEP) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  vcs_word_t         in_word,
  input  logic              in_valid,
  output logic              in_ready,
  output vcs_word_t         out_word,
  output logic [DEST_W-1:0] out_dest,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [15:0]       n_unroutable   // packets with an out-of-range channel
);
  localparam int unsigned CC_PER_EP = (P_NCOARSE + P_NEP - 1) / P_NEP;

  typedef logic [DEST_W-1:0] route_t [P_NCOARSE];

  function automatic route_t build_routes();
    route_t r;
    for (int c = 0; c < P_NCOARSE; c++) r[c] = DEST_W'(c / CC_PER_EP);
    return r;
  endfunction

  localparam route_t ROUTE = build_routes();

  logic routable;
  assign routable  = (32'(in_word.hdr.mgt_channel) < P_NCOARSE);
  assign out_word  = in_word;
  assign out_dest  = routable ? ROUTE[in_word.hdr.mgt_channel] : '0;
  assign out_valid = in_valid && routable;
  assign in_ready  = routable ? out_ready : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_unroutable <= '0;
    else if (in_valid && !routable && in_word.last) n_unroutable <= n_unroutable + 1'b1;
  end
endmodule
