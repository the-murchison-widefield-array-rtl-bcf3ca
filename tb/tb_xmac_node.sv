// tb_xmac_node: tests one correlation node (assembly, correlation, output framing)
// at reduced size: two boards of two dual-polarisation stations, two lanes per
// board, eight fine channels and four time samples per second.
//
// The bench sends the checked lane words of whole seconds, lanes interleaved
// packet by packet as the cross-connect would deliver them, with data words
// that are a hash of their position. Every archive record is compared with
// visibilities computed here, in one-second and in half-second mode. It then
// sends the start of a second that is never
// completed followed by a newer second (the stale buffer must be restarted),
// a packet of an older second than the one filling its block (dropped as
// late), and seconds while the archive
// is held off (the node must stall its input). The time from the last word of
// a second to the end of its record is checked against the engine's pair rate:
// NBASE * (NCH/2^fs) * (NT*2^fs + 2) cycles plus the output words.
module tb_xmac_node;
  import mwa_pkg::*;

  localparam int unsigned TNIN = 4, TNF2 = 2, TNGROUP = 2, TNMGT = 2, TNPFB = 2, TNFRAME = 2, TNBANK = 2;
  localparam int unsigned HALF  = TNIN / 2;
  localparam int unsigned NDATA = TNF2 * HALF;
  localparam int unsigned NST   = TNPFB * HALF;
  localparam int unsigned NCH   = TNMGT * TNGROUP * TNF2;
  localparam int unsigned NT    = TNFRAME * TNBANK;
  localparam int unsigned NBASE = NST * (NST + 1) / 2;
  localparam int unsigned NLANE = TNPFB * TNMGT;

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
  vcs_word_t   in_word;
  logic        in_valid = 0, in_ready;
  logic [31:0] out_data;
  logic        out_valid, out_ready = 1, out_sop, out_eop;
  logic [15:0] n_blocks, n_stall, n_resync, n_late;

  xmac_node #(
    .P_NIN(TNIN), .P_NF2(TNF2), .P_NGROUP(TNGROUP), .P_NMGT(TNMGT), .P_NPFB(TNPFB),
    .P_NCC(1), .P_NFRAME(TNFRAME), .P_NBANK(TNBANK)
  ) dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] gen_word(int S, int l, int bank, int grp, int frame, int w);
    int unsigned x;
    x = ((((S * NLANE + l) * TNBANK + bank) * TNGROUP + grp) * TNFRAME + frame) * NDATA + w;
    x = x * 32'h9E3779B1;
    x = x ^ (x >> 15);
    x = x * 32'h85EBCA6B;
    x = x ^ (x >> 13);
    return x[23:8];
  endfunction

  function automatic int nib(logic [3:0] n);
    return (n == 4'h8) ? 0 : int'(signed'(n));
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

  // expected visibility words for second S
  function automatic void expect_rec(int S, int fs, int t_lo, int t_hi, ref logic [31:0] q [$]);
    int xr [NT][NCH][NST][2], xi [NT][NCH][NST][2];
    q.delete();
    for (int t = 0; t < NT; t++)
      for (int c = 0; c < NCH; c++)
        for (int s = 0; s < NST; s++)
          for (int p = 0; p < 2; p++) begin
            logic [15:0] wd;
            logic [7:0]  smp;
            wd  = gen_word(S, (s / HALF) * TNMGT + c / (TNF2 * TNGROUP), t / TNFRAME,
                           (c / TNF2) % TNGROUP, t % TNFRAME, (c % TNF2) * HALF + s % HALF);
            smp = (p == 0) ? wd[15:8] : wd[7:0];
            xr[t][c][s][p] = nib(smp[7:4]);
            xi[t][c][s][p] = nib(smp[3:0]);
          end
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

  // ---------------- driver ----------------
  // one packet of lane l (second S), words handed over one per accepted cycle
  task automatic send_packet(int S, int l, int bank, int grp, int frame);
    for (int w = 0; w < int'(NDATA); w++) begin
      @(negedge clk);
      in_word.hdr.sec_tick    = (bank == 0 && grp == 0 && frame == 0);
      in_word.hdr.pfb_id      = 2'(l / TNMGT);
      in_word.hdr.mgt_id      = 3'(l % TNMGT);
      in_word.hdr.mgt_bank    = 5'(bank);
      in_word.hdr.mgt_channel = 5'd0;
      in_word.hdr.mgt_group   = 2'(grp);
      in_word.hdr.mgt_frame   = 9'(frame);
      in_word.sec  = SEC_W'(S);
      in_word.widx = WIDX_W'(w);
      in_word.last = (w == int'(NDATA) - 1);
      in_word.data = gen_word(S, l, bank, grp, frame, w);
      in_valid = 1;
      @(posedge clk iff in_ready);
    end
    @(negedge clk) in_valid = 0;
  endtask

  task automatic send_second(int S, int npk);
    int n;
    n = 0;
    for (int b = 0; b < int'(TNBANK); b++)
      for (int g = 0; g < int'(TNGROUP); g++)
        for (int f = 0; f < int'(TNFRAME); f++)
          for (int l = 0; l < int'(NLANE); l++)
            if (n < npk) begin send_packet(S, l, b, g, f); n++; end
  endtask

  // ---------------- archive side ----------------
  logic [31:0] rec [$];
  logic [31:0] expq [$];
  int nrec = 0, last_in_cyc = 0, lat_ok = 0;
  bit hold = 0, timing = 0;
  int seen [int];   // seconds seen in records
  int n_half = 0;   // half-second records

  always @(negedge clk) out_ready = !hold && ($urandom_range(0, 3) != 0 || timing);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (rec.size() == 0) check(out_sop, "sop on first word");
    rec.push_back(out_data);
    if (out_eop) begin
      int nw, fs, S;
      nw = int'(rec[1]);
      fs = int'(fscrunch_log2);
      S  = int'(rec[0][15:0]);
      check(nw == int'((NCH >> fs) * NBASE * 8), "record length");
      check(rec.size() % 720 == 0, "padded to 2880-byte blocks");
      if (half_sec) begin
        int part;
        part = int'(rec[0][16]);
        check(rec[0][31:17] == 0 && part == n_half % 2, "half-second part in the time tag");
        expect_rec(S, fs, part * int'(NT) / 2, part * int'(NT) / 2 + int'(NT) / 2 - 1, expq);
        n_half++;
      end else begin
        check(rec[0][31:16] == 0, "whole-second time tag");
        expect_rec(S, fs, 0, int'(NT) - 1, expq);
      end
      for (int i = 0; i < nw; i++) check(rec[i + 2] == expq[i], "visibility word");
      for (int i = nw + 2; i < rec.size(); i++) check(rec[i] == 0, "padding");
      seen[S] = 1;
      if (timing) begin
        // engine: NT*2^fs+2 cycles per visibility; output: 8 words per
        // visibility, overlapped with the engine, plus header and padding
        int eng;
        eng = int'(NBASE * (NCH >> fs) * ((NT << fs) + 2));
        check(cyc - last_in_cyc <= eng + 720 + 20, "latency from last word to end of record");
        check(cyc - last_in_cyc >= eng, "latency not below engine rate");
        lat_ok++;
      end
      nrec++;
      rec.delete();
    end
  end

  int stall_cyc = 0;
  always @(posedge clk) if (rst_n && in_valid && !in_ready) stall_cyc++;

  task automatic wait_rec(int n);
    int g;
    g = 0;
    while (nrec < n && g < 20000) begin @(posedge clk); g++; end
    check(g < 20000, "record arrives");
  endtask

  initial begin
    in_word = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // whole seconds in each averaging mode, with the latency checked
    timing = 1;
    for (int fs = 0; fs < 4; fs++) begin
      fscrunch_log2 = 2'(fs);
      send_second(10 + fs, 1 << 30);
      last_in_cyc = cyc;
      wait_rec(fs + 1);
    end
    timing = 0;
    check(n_blocks == 4, "four blocks");

    // second 20 is left unfinished; second 22 (same buffer) restarts it
    fscrunch_log2 = 0;
    send_second(20, 5);
    send_second(22, 1 << 30);
    wait_rec(5);
    check(seen.exists(22) && !seen.exists(20), "stale second restarted, newer one correlated");
    check(n_resync == 1, "resync counted");

    // second 23 starts filling block 1; a packet of the older second 21 then
    // maps to that block and is dropped as late
    send_second(23, 1);
    send_second(21, 1);
    repeat (20) @(posedge clk);
    check(n_late == NDATA, "late packet dropped (counted per word)");

    // archive held off: seconds 24, 25 fill both buffers, 26 must stall
    hold = 1;
    fork
      begin send_second(24, 1 << 30); send_second(25, 1 << 30); send_second(26, 1 << 30); end
      begin repeat (3000) @(posedge clk); hold = 0; end
    join
    wait_rec(8);
    check(stall_cyc > 0 && n_stall > 0, "input stalled while both buffers were held");
    check(seen.exists(24) && seen.exists(25) && seen.exists(26), "no second lost to the stall");
    check(lat_ok == 4, "latency checked in every mode");

    // half-second integration: one block gives two records, samples 0..NT/2-1
    // and NT/2..NT-1, both checked against the reference
    wait (!out_valid);
    half_sec = 1;
    fscrunch_log2 = 2;
    send_second(30, 1 << 30);
    send_second(31, 1 << 30);
    wait_rec(12);
    check(n_half == 4, "two half-second records per block");
    $display("node: blocks=%0d stall=%0d resync=%0d late=%0d records=%0d", n_blocks, n_stall, n_resync, n_late, nrec);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
