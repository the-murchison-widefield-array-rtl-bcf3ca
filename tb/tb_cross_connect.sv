// tb_cross_connect: checks the lane-to-node packet switch.
// Four lanes send packets of 1 to 5 words to random nodes of three; nodes
// accept at random. Each packet's words carry (lane, packet number, word) so the
// checker can verify that every node sees whole packets, never interleaved, that
// each lane's packets reach their node in order, and that all packets arrive.
// A second phase keeps all lanes busy towards one node and checks that the
// round-robin arbiter serves every lane.
module tb_cross_connect;
  import mwa_pkg::*;
  localparam int unsigned NL = 4, NE = 3, NP = 60;
  logic clk = 0, rst_n = 0;
  vcs_word_t in_word [NL];
  logic [1:0] in_dest [NL];
  logic in_valid [NL], in_ready [NL];
  vcs_word_t out_word [NE];
  logic out_valid [NE], out_ready [NE];
  int checks = 0, failures = 0;

  cross_connect #(.P_NLANE(NL), .P_NEP(NE)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // per-lane packet lists: destination and length
  int pdest [NL][NP], plen [NL][NP];
  int pkt [NL], wrd [NL];
  int phase2 = 0;
  int served [NL];

  // drive the lanes: data word encodes lane, packet, word
  always_comb
    for (int l = 0; l < NL; l++) begin
      in_word[l]      = '0;
      in_word[l].data = 16'((l << 12) | ((pkt[l] % 256) << 4) | wrd[l]);
      in_word[l].last = (wrd[l] == plen[l][pkt[l] % NP] - 1);
      in_dest[l]      = 2'(pdest[l][pkt[l] % NP]);
      in_valid[l]     = rst_n && (pkt[l] < NP || phase2 != 0);
    end

  // expected next packet per (node, lane) and the node's current packet
  int cur_lane [NE], cur_pkt [NE], cur_w [NE];
  int next_pkt [NE][NL];

  always @(posedge clk) if (rst_n) begin
    for (int e = 0; e < NE; e++)
      if (out_valid[e] && out_ready[e]) begin
        int l, p, w;
        l = int'(out_word[e].data[15:12]);
        p = int'(out_word[e].data[11:4]);
        w = int'(out_word[e].data[3:0]);
        if (phase2 == 0) begin
          if (cur_w[e] == 0) begin
            // a packet starts: it must be the next one of that lane for this node
            while (next_pkt[e][l] < NP && pdest[l][next_pkt[e][l]] != e) next_pkt[e][l]++;
            check(p == next_pkt[e][l] % 256, "lane order");
            cur_lane[e] = l; cur_pkt[e] = p;
          end else check(l == cur_lane[e] && p == cur_pkt[e], "no interleaving");
          check(w == cur_w[e], "word order");
          if (out_word[e].last) begin cur_w[e] = 0; next_pkt[e][l]++; end
          else cur_w[e]++;
        end else if (out_word[e].last) served[l]++;
      end
    for (int l = 0; l < NL; l++)
      if (in_valid[l] && in_ready[l]) begin
        if (in_word[l].last) begin pkt[l] <= pkt[l] + 1; wrd[l] <= 0; end
        else wrd[l] <= wrd[l] + 1;
      end
  end

  always @(negedge clk) for (int e = 0; e < NE; e++) out_ready[e] = ($urandom_range(0, 2) != 0);

  initial begin
    for (int l = 0; l < NL; l++) begin
      pkt[l] = 0; wrd[l] = 0; served[l] = 0;
      for (int p = 0; p < NP; p++) begin
        pdest[l][p] = $urandom_range(0, NE - 1);
        plen[l][p]  = $urandom_range(1, 5);
      end
    end
    for (int e = 0; e < NE; e++) begin
      cur_w[e] = 0;
      for (int l = 0; l < NL; l++) next_pkt[e][l] = 0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (pkt[0] == NP && pkt[1] == NP && pkt[2] == NP && pkt[3] == NP);
    repeat (5) @(posedge clk);
    for (int e = 0; e < NE; e++) check(cur_w[e] == 0, "no packet left open");
    // phase 2: every lane always has a packet for node 0
    @(negedge clk);
    for (int l = 0; l < NL; l++)
      for (int p = 0; p < NP; p++) begin pdest[l][p] = 0; plen[l][p] = 2; end
    phase2 = 1;
    repeat (400) @(posedge clk);
    for (int l = 0; l < NL; l++) check(served[l] > 10, "round robin serves every lane");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
