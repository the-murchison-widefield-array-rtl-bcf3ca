// tb_mwa_correlator: end-to-end test of the correlator data path at reduced size.
//
// Two filterbank boards of two fibres, two lanes per board, four inputs (two
// dual-polarisation stations) per board, two coarse channels and two nodes; a
// second is two banks of two frames, so every node correlates four stations
// over eight fine channels and four time samples per second.
//
// The bench plays the filterbank: every lane word it offers is a hash of the
// second, lane and word position, so the samples of each station, channel and
// time are known, and every archive record is compared word by word with the
// visibilities computed here (x[s1] * conj(x[s2]) summed over time and the
// averaged channels, rounded to single precision). The fibres carry a sample
// counter so that the input alignment can be checked.
//
// Phases:
//   A  one second at a time, once in each channel-averaging mode (1, 2, 4, 8);
//      every record is checked.
//   B  the archive is held off while seconds keep arriving: the assembly buffers
//      fill, the node stalls, the back-pressure reaches the capture stage and
//      packets are lost; a checksum error is injected on one lane.
//   C  seconds one at a time again: lanes resynchronise on the next tick, the
//      stale half-filled assembly buffer is restarted, and the records are
//      checked again; the last second is integrated as two half-second records.
// The fibre skew is changed during the run to force a realignment.
// Each mechanism is counted and one that never happened is a failure.
module tb_mwa_correlator;
  import mwa_pkg::*;

  localparam int unsigned TNPFB = 2, TNFIBRE = 2, TNMGT = 2, TNIN = 4, TNF2 = 2, TNGROUP = 2;
  localparam int unsigned TNCOARSE = 2, TNFRAME = 2, TNBANK = 2, TNEP = 2, TDEPTH = 16;
  localparam int unsigned NLANE = TNPFB * TNMGT;
  localparam int unsigned HALF  = TNIN / 2;
  localparam int unsigned NDATA = TNF2 * HALF;
  localparam int unsigned PPS   = TNBANK * TNCOARSE * TNGROUP * TNFRAME;   // packets per lane-second
  localparam int unsigned NST   = TNPFB * HALF;
  localparam int unsigned NCH   = (TNCOARSE / TNEP) * TNMGT * TNGROUP * TNF2;
  localparam int unsigned NT    = TNFRAME * TNBANK;
  localparam int unsigned NBASE = NST * (NST + 1) / 2;
  localparam int unsigned FPER  = 64;   // fibre tick period in samples
  // Every lane sends its packets of one coarse channel back to back, so all lanes
  // feed the same node at once; the lanes are paced so that the node's link can
  // carry them (one packet per lane every PACE cycles).
  localparam int unsigned PACE  = NLANE * NDATA + 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  logic [1:0]  fscrunch_log2 = 0;
  logic        half_sec = 0;
  logic [15:0] fib_data  [TNPFB][TNFIBRE];
  logic        fib_tick  [TNPFB][TNFIBRE];
  logic        fib_valid [TNPFB][TNFIBRE];
  logic [15:0] pfb_in_data [TNPFB][TNFIBRE];
  logic        pfb_in_tick [TNPFB], pfb_in_valid [TNPFB], pfb_aligned [TNPFB];
  logic [15:0] ch_data [NLANE];
  logic        ch_valid [NLANE], ch_ready [NLANE];
  logic [31:0] arc_data [TNEP];
  logic        arc_valid [TNEP], arc_ready [TNEP], arc_sop [TNEP], arc_eop [TNEP];
  logic        lane_synced [NLANE];
  logic [15:0] lane_good [NLANE], lane_csum [NLANE], lane_seq [NLANE], lane_unsync [NLANE], lane_ovf [NLANE];
  logic [15:0] node_blocks [TNEP], node_stall [TNEP], node_resync [TNEP], node_late [TNEP];
  logic [15:0] pfb_realign [TNPFB];

  mwa_correlator #(
    .P_NPFB(TNPFB), .P_NFIBRE(TNFIBRE), .P_NMGT(TNMGT), .P_NIN(TNIN), .P_NF2(TNF2),
    .P_NGROUP(TNGROUP), .P_NCOARSE(TNCOARSE), .P_NFRAME(TNFRAME), .P_NBANK(TNBANK),
    .P_NEP(TNEP), .P_DEPTH(TDEPTH)
  ) dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- filterbank model: lane words ----------------
  function automatic logic [15:0] gen_word(int l, int k);
    int unsigned x;
    x = (l * 7919 + k) * 32'h9E3779B1;
    x = x ^ (x >> 15);
    x = x * 32'h85EBCA6B;
    x = x ^ (x >> 13);
    return x[23:8];
  endfunction

  function automatic int nib(logic [3:0] n);
    return (n == 4'h8) ? 0 : int'(signed'(n));
  endfunction

  int lane_k [NLANE];      // words accepted so far on each lane
  int lane_todo [NLANE];   // words still to offer
  int lane_next [NLANE];   // earliest cycle at which the lane may start its next packet
  always @(posedge clk)
    for (int l = 0; l < NLANE; l++)
      if (ch_valid[l] && ch_ready[l]) begin
        if (lane_k[l] % NDATA == 0) lane_next[l] = cyc + PACE;
        lane_k[l]++;
        lane_todo[l]--;
      end
  always @(negedge clk)
    for (int l = 0; l < NLANE; l++) begin
      ch_valid[l] = rst_n && (lane_todo[l] > 0) && (lane_k[l] % NDATA != 0 || cyc >= lane_next[l]);
      ch_data[l]  = gen_word(l, lane_k[l]);
    end

  task automatic send_seconds(int n);
    for (int l = 0; l < NLANE; l++) lane_todo[l] += n * PPS * NDATA;
  endtask

  function automatic bit lanes_idle();
    for (int l = 0; l < NLANE; l++) if (lane_todo[l] != 0) return 0;
    return 1;
  endfunction

  // sample of lane-second S for node e: time t, node channel c, station s, pol p
  function automatic void sample(int S, int e, int t, int c, int s, int p, output int re, output int im);
    int pfb, mgt, grp, f2, bank, frame, pk, k, w;
    logic [15:0] word;
    logic [7:0]  smp;
    f2    = c % TNF2;
    grp   = (c / TNF2) % TNGROUP;
    mgt   = c / (TNF2 * TNGROUP);
    pfb   = s / HALF;
    bank  = t / TNFRAME;
    frame = t % TNFRAME;
    pk    = ((bank * TNCOARSE + e) * TNGROUP + grp) * TNFRAME + frame;
    w     = f2 * HALF + s % HALF;
    k     = (S * PPS + pk) * NDATA + w;
    word  = gen_word(pfb * TNMGT + mgt, k);
    smp   = (p == 0) ? word[15:8] : word[7:0];
    re    = nib(smp[7:4]);
    im    = nib(smp[3:0]);
  endfunction

  function automatic logic [31:0] to_single(int v);
    logic [63:0] d;
    logic [23:0] keep;
    logic [28:0] lower;
    int ex;
    if (v == 0) return 32'd0;
    d     = $realtobits(real'(v));
    ex    = int'(d[62:52]) - 1023 + 127;
    keep  = {1'b0, d[51:29]};
    lower = d[28:0];
    if (lower[28] && ((|lower[27:0]) || keep[0])) keep = keep + 1;
    if (keep[23]) begin keep = '0; ex = ex + 1; end
    return {d[63], 8'(ex), keep[22:0]};
  endfunction

  // expected record words (without header and padding) for node e, lane-second S
  function automatic void expect_rec(int S, int e, int fs, int t_lo, int t_hi, ref logic [31:0] q [$]);
    int xr [NT][NCH][NST][2], xi [NT][NCH][NST][2];
    q.delete();
    for (int t = 0; t < NT; t++)
      for (int c = 0; c < NCH; c++)
        for (int s = 0; s < NST; s++)
          for (int p = 0; p < 2; p++) sample(S, e, t, c, s, p, xr[t][c][s][p], xi[t][c][s][p]);
    for (int c = 0; c < (NCH >> fs); c++)
      for (int s1 = 0; s1 < NST; s1++)
        for (int s2 = 0; s2 <= s1; s2++)
          for (int p1 = 0; p1 < 2; p1++)
            for (int p2 = 0; p2 < 2; p2++) begin
              int sr, si;
              sr = 0; si = 0;
              for (int f = 0; f < (1 << fs); f++)
                for (int t = t_lo; t <= t_hi; t++) begin
                  int cc;
                  cc = (c << fs) + f;
                  sr += xr[t][cc][s1][p1] * xr[t][cc][s2][p2] + xi[t][cc][s1][p1] * xi[t][cc][s2][p2];
                  si += xi[t][cc][s1][p1] * xr[t][cc][s2][p2] - xr[t][cc][s1][p1] * xi[t][cc][s2][p2];
                end
              q.push_back(to_single(sr));
              q.push_back(to_single(si));
            end
  endfunction

  // ---------------- archive side ----------------
  logic [31:0] rec [TNEP][$];
  int  nrec [TNEP];
  bit  check_on = 0;      // compare records with the reference
  int  sec_off  = -1;     // record label minus lane-second, learnt from the first checked record
  int  seen_fs [4];
  int  n_pad = 0;
  logic [31:0] expq [$];

  bit hold = 0;
  always @(negedge clk)
    for (int e = 0; e < TNEP; e++) if (!hold) arc_ready[e] = ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n)
    for (int e = 0; e < TNEP; e++)
      if (arc_valid[e] && arc_ready[e]) begin
        if (rec[e].size() == 0) check(arc_sop[e], "sop on first record word");
        else check(!arc_sop[e], "no sop inside a record");
        rec[e].push_back(arc_data[e]);
        if (arc_eop[e]) begin
          int nw, fs;
          nw = int'(rec[e][1]);
          fs = (nw == NCH * NBASE * 8) ? 0 : (nw == NCH / 2 * NBASE * 8) ? 1 :
               (nw == NCH / 4 * NBASE * 8) ? 2 : (nw == NCH / 8 * NBASE * 8) ? 3 : -1;
          check(fs >= 0, "record length word");
          check(rec[e].size() % 720 == 0 && rec[e].size() >= nw + 2, "record padded to 2880-byte blocks");
          if (rec[e].size() > nw + 2) n_pad++;
          if (check_on && fs >= 0) begin
            int S, part;
            part = int'(rec[e][0][16]);
            if (sec_off < 0) sec_off = int'(rec[e][0][15:0]) - cur_sec;
            S = int'(rec[e][0][15:0]) - sec_off;
            check(S == cur_sec, "record carries the second just sent");
            check(part == (half_sec ? nrec_half[e] % 2 : 0), "half-second part");
            if (half_sec) begin
              expect_rec(S, e, fs, part * int'(NT / 2), part * int'(NT / 2) + int'(NT / 2) - 1, expq);
              nrec_half[e]++;
            end else expect_rec(S, e, fs, 0, int'(NT) - 1, expq);
            for (int i = 0; i < nw; i++) check(rec[e][i + 2] == expq[i], "visibility word");
            for (int i = nw + 2; i < rec[e].size(); i++) check(rec[e][i] == 0, "padding word");
            check(fs == int'(fscrunch_log2), "averaging mode");
            seen_fs[fs]++;
          end
          nrec[e]++;
          rec[e].delete();
        end
      end

  // ---------------- fibres ----------------
  int fdelay [TNPFB][TNFIBRE];
  always @(negedge clk)
    for (int p = 0; p < TNPFB; p++)
      for (int i = 0; i < TNFIBRE; i++) begin
        int n;
        n = cyc - fdelay[p][i];
        fib_valid[p][i] = rst_n && n >= 0;
        fib_data[p][i]  = 16'(n);
        fib_tick[p][i]  = (n >= 0) && (n % FPER == 0);
      end

  // a step in a fibre's delay is only noticed at the next tick or when a buffer
  // overflows, so the output is not checked for a tick period after a step
  int n_aligned_out = 0, skew_cyc = -1000;
  always @(posedge clk) if (rst_n)
    for (int p = 0; p < TNPFB; p++)
      if (pfb_in_valid[p] && cyc - skew_cyc > int'(FPER + TDEPTH)) begin
        bit same;
        same = 1;
        for (int i = 1; i < TNFIBRE; i++) same &= (pfb_in_data[p][i] == pfb_in_data[p][0]);
        check(same, "fibres aligned at the filterbank input");
        check(pfb_in_tick[p] == (pfb_in_data[p][0] % FPER == 0), "tick on second boundary sample");
        n_aligned_out++;
      end

  // ---------------- sequence ----------------
  int cur_sec = 0;   // lane-second being sent
  int stall_seen = 0;
  always @(posedge clk) if (rst_n && dut.g_node[0].u_node.in_valid && !dut.g_node[0].u_node.in_ready) stall_seen++;

  task automatic wait_records(int n0);
    int guard;
    guard = 0;
    while ((nrec[0] < n0 || nrec[1] < n0) && guard < 40000) begin @(posedge clk); guard++; end
    check(guard < 40000, "records arrive");
  endtask

  int nrec_half [TNEP];
  task automatic one_second(int fs, bit half = 0);
    int n0;
    n0 = nrec[0] + (half ? 2 : 1);
    @(negedge clk) fscrunch_log2 = 2'(fs);
    half_sec = half;
    send_seconds(1);
    wait_records(n0);
    cur_sec++;
  endtask

  initial begin
    for (int l = 0; l < NLANE; l++) begin lane_k[l] = 0; lane_next[l] = 0; lane_todo[l] = 0; ch_valid[l] = 0; ch_data[l] = 0; end
    for (int e = 0; e < TNEP; e++) begin arc_ready[e] = 1; nrec[e] = 0; nrec_half[e] = 0; end
    for (int p = 0; p < TNPFB; p++)
      for (int i = 0; i < TNFIBRE; i++) fdelay[p][i] = 10 + 3 * i + p;
    repeat (4) @(negedge clk);
    rst_n = 1;

    // ---- A: one second in each averaging mode ----
    check_on = 1;
    for (int fs = 0; fs < 4; fs++) one_second(fs);
    check(nrec[0] == 4 && nrec[1] == 4, "four records per node");

    // skew one fibre by more than the buffer can absorb and back
    fdelay[1][1] += 20;
    skew_cyc = cyc;

    // ---- B: archive held off, seconds keep arriving ----
    check_on = 0;
    hold = 1;
    @(negedge clk) for (int e = 0; e < TNEP; e++) arc_ready[e] = 0;
    fscrunch_log2 = 0;
    send_seconds(4);
    repeat (PPS * (NDATA + 4) * 2) @(posedge clk);
    // corrupt one data word on lane 0 (bit flip on the serial link)
    @(posedge clk iff ch_ready[0] && ch_valid[0]);
    @(negedge clk) force dut.g_lane[0].lane_data = ~dut.g_lane[0].u_pkt.lane_data;
    @(negedge clk) release dut.g_lane[0].lane_data;
    while (!lanes_idle()) @(posedge clk);
    fdelay[1][1] -= 20;
    skew_cyc = cyc;
    repeat (2000) @(posedge clk);
    hold = 0;
    // drain what is left
    repeat (8000) @(posedge clk);
    cur_sec += 4;

    // ---- C: clean seconds again ----
    check_on = 1;
    sec_off  = -1;
    // the first second after the loss resynchronises the lanes; its record may be
    // absent or stale, so it is only sent, not checked
    check_on = 0;
    send_seconds(1);
    while (!lanes_idle()) @(posedge clk);
    repeat (6000) @(posedge clk);
    cur_sec++;
    check_on = 1;
    for (int i = 0; i < 3; i++) one_second(i % 4);
    one_second(2, 1);   // half-second integration at 40 kHz
    half_sec = 0;

    // ---- mechanisms ----
    begin
      int ovf, csum, uns, good, stall, rsy, late, blk, rea;
      ovf = 0; csum = 0; uns = 0; good = 0; stall = 0; rsy = 0; late = 0; blk = 0; rea = 0;
      for (int l = 0; l < NLANE; l++) begin
        ovf += lane_ovf[l]; csum += lane_csum[l]; uns += lane_unsync[l]; good += lane_good[l];
        check(lane_synced[l], "lane synchronised at the end");
      end
      for (int e = 0; e < TNEP; e++) begin
        stall += node_stall[e]; rsy += node_resync[e]; late += node_late[e]; blk += node_blocks[e];
      end
      for (int p = 0; p < TNPFB; p++) rea += pfb_realign[p];
      $display("mechanisms: good_packets=%0d blocks=%0d stall=%0d capture_overflow=%0d csum_err=%0d unsync_drop=%0d",
               good, blk, stall, ovf, csum, uns);
      $display("            assembly_resync=%0d late=%0d pfb_realign=%0d fscrunch=%0d/%0d/%0d/%0d half_sec_records=%0d padded_records=%0d aligned_words=%0d",
               rsy, late, rea, seen_fs[0], seen_fs[1], seen_fs[2], seen_fs[3], nrec_half[0] + nrec_half[1], n_pad, n_aligned_out);
      check(good > 0,  "mechanism: good packets");
      check(blk > 0,   "mechanism: completed blocks");
      check(stall > 0, "mechanism: assembly stall");
      check(ovf > 0,   "mechanism: capture overflow");
      check(csum > 0,  "mechanism: checksum error");
      check(uns > 0,   "mechanism: packets dropped while unsynchronised");
      check(rsy > 0,   "mechanism: assembly restart on a newer second");
      check(rea > 0,   "mechanism: fibre realignment");
      check(n_pad > 0, "mechanism: record padding");
      for (int f = 0; f < 4; f++) check(seen_fs[f] > 0, "mechanism: averaging mode");
      check(nrec_half[0] == 2 && nrec_half[1] == 2, "mechanism: half-second records");
      check(n_aligned_out > 0, "mechanism: aligned fibre output");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
