// cross_connect: packet switch between the capture lanes and the XMAC nodes.
//
// Every output port owns a round-robin arbiter. When idle it grants the next
// lane, after the last one served, whose head word is valid and addressed to
// that port, and then stays with that lane until the packet's last word has
// passed, so packets are never interleaved on an output. A lane holds a single
// destination per packet, so it is granted by at most one port. In the deployed
// system this job is done by a commodity 10 Gb Ethernet switch carrying TCP
// streams; this module keeps only the function (any lane to any node, whole
// packets, fair sharing) and the round-robin policy is this design's choice.
//
// Interface: per lane a data word with destination on in_valid/in_ready; per
// node a data word on out_valid/out_ready. Words pass combinationally; the grant
// is taken on the first word of a packet and released after its last word.
module cross_connect
  import mwa_pkg::*;
#(
  parameter int unsigned P_NLANE   = NPFB * NMGT,
  parameter int unsigned P_NEP     = NEP,
  localparam int unsigned DEST_W   = (P_NEP > 1) ? $clog2(P_NEP) : 1,
  localparam int unsigned LANE_W   = (P_NLANE > 1) ? $clog2(P_NLANE) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  vcs_word_t         in_word  [P_NLANE],
  input  logic [DEST_W-1:0] in_dest  [P_NLANE],
  input  logic              in_valid [P_NLANE],
  output logic              in_ready [P_NLANE],
  output vcs_word_t         out_word  [P_NEP],
  output logic              out_valid [P_NEP],
  input  logic              out_ready [P_NEP]
);
  logic              busy  [P_NEP];
  logic [LANE_W-1:0] owner [P_NEP];   // lane being forwarded (valid when busy)
  logic [LANE_W-1:0] last  [P_NEP];   // lane served most recently
  logic              pick_ok [P_NEP];
  logic [LANE_W-1:0] pick    [P_NEP];
  logic [LANE_W-1:0] sel     [P_NEP];
  logic              sel_ok  [P_NEP];

  // round-robin choice for each idle port
  always_comb begin
    for (int e = 0; e < P_NEP; e++) begin
      pick_ok[e] = 1'b0;
      pick[e]    = '0;
      for (int k = 1; k <= P_NLANE; k++) begin
        int unsigned l;
        l = (int'(last[e]) + k) % P_NLANE;
        if (!pick_ok[e] && in_valid[l] && in_dest[l] == DEST_W'(e)) begin
          pick_ok[e] = 1'b1;
          pick[e]    = LANE_W'(l);
        end
      end
      sel[e]    = busy[e] ? owner[e] : pick[e];
      sel_ok[e] = busy[e] || pick_ok[e];
    end
  end

  always_comb begin
    for (int e = 0; e < P_NEP; e++) begin
      out_word[e]  = in_word[sel[e]];
      out_valid[e] = sel_ok[e] && in_valid[sel[e]] && in_dest[sel[e]] == DEST_W'(e);
    end
  end

  always_comb begin
    for (int l = 0; l < P_NLANE; l++) in_ready[l] = 1'b0;
    for (int e = 0; e < P_NEP; e++)
      if (sel_ok[e] && in_valid[sel[e]] && in_dest[sel[e]] == DEST_W'(e) && out_ready[e])
        in_ready[sel[e]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < P_NEP; e++) begin
        busy[e]  <= 1'b0;
        owner[e] <= '0;
        last[e]  <= LANE_W'(P_NLANE - 1);
      end
    end else begin
      for (int e = 0; e < P_NEP; e++) begin
        if (!busy[e] && pick_ok[e]) begin
          owner[e] <= pick[e];
          last[e]  <= pick[e];
          busy[e]  <= 1'b1;
        end
        if (out_valid[e] && out_ready[e] && out_word[e].last) busy[e] <= 1'b0;
      end
    end
  end
endmodule
