// tb_xmac_node_stations: one correlation node with the full station and channel
// count of the 128-tile array (4 boards x 32 dual-polarisation stations = 128
// stations, 8 lanes x 4 groups x 4 channels = 128 fine channels of one coarse
// channel), and the integration shortened to 2 banks of 2 samples so that a
// block can be simulated. Two seconds are sent: the first correlated at 10 kHz
// (no averaging), the second at 40 kHz (averaging over 4 channels), the two
// frequency resolutions used in observing. Every word of both records (8.4 and
// 2.1 million words) is compared with a reference correlation worked out here,
// and the time from the last input word to the end of each record is checked
// against the engine rate (NT*2^fs + 2 cycles per visibility) and the output
// rate (8 words per visibility).
module tb_xmac_node_stations;
  import mwa_pkg::*;

  localparam int unsigned TNFRAME = 2, TNBANK = 2;
  localparam int unsigned HALF  = NIN / 2;
  localparam int unsigned NDATA = NF2 * HALF;
  localparam int unsigned NST   = NPFB * HALF;
  localparam int unsigned NCH   = NMGT * NGROUP * NF2;
  localparam int unsigned NT    = TNFRAME * TNBANK;
  localparam int unsigned NBASE = NST * (NST + 1) / 2;
  localparam int unsigned NLANE = NPFB * NMGT;

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

  xmac_node #(.P_NFRAME(TNFRAME), .P_NBANK(TNBANK)) dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (30000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] gen_word(int S, int l, int bank, int grp, int frame, int w);
    int unsigned x;
    x = ((((S * NLANE + l) * TNBANK + bank) * NGROUP + grp) * TNFRAME + frame) * NDATA + w;
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

  // reference samples of the second being checked
  int xr [NT][NCH][NST][2], xi [NT][NCH][NST][2];
  task automatic load_ref(int S);
    for (int t = 0; t < int'(NT); t++)
      for (int c = 0; c < int'(NCH); c++)
        for (int s = 0; s < int'(NST); s++)
          for (int p = 0; p < 2; p++) begin
            logic [15:0] wd;
            logic [7:0]  smp;
            wd  = gen_word(S, (s / HALF) * NMGT + c / (NF2 * NGROUP), t / TNFRAME,
                           (c / NF2) % NGROUP, t % TNFRAME, (c % NF2) * HALF + s % HALF);
            smp = (p == 0) ? wd[15:8] : wd[7:0];
            xr[t][c][s][p] = nib(smp[7:4]);
            xi[t][c][s][p] = nib(smp[3:0]);
          end
  endtask

  task automatic send_second(int S);
    for (int b = 0; b < int'(TNBANK); b++)
      for (int g = 0; g < int'(NGROUP); g++)
        for (int f = 0; f < int'(TNFRAME); f++)
          for (int l = 0; l < int'(NLANE); l++)
            for (int w = 0; w < int'(NDATA); w++) begin
              @(negedge clk);
              in_word.hdr.sec_tick    = (b == 0 && g == 0 && f == 0);
              in_word.hdr.pfb_id      = 2'(l / NMGT);
              in_word.hdr.mgt_id      = 3'(l % NMGT);
              in_word.hdr.mgt_bank    = 5'(b);
              in_word.hdr.mgt_channel = 5'd0;
              in_word.hdr.mgt_group   = 2'(g);
              in_word.hdr.mgt_frame   = 9'(f);
              in_word.sec  = SEC_W'(S);
              in_word.widx = WIDX_W'(w);
              in_word.last = (w == int'(NDATA) - 1);
              in_word.data = gen_word(S, l, b, g, f, w);
              in_valid = 1;
              @(posedge clk iff in_ready);
            end
    @(negedge clk) in_valid = 0;
  endtask

  // streaming record checker
  int wi = 0, vc = 0, vs1 = 0, vs2 = 0, cur_fs = 0, nrec = 0, nw = 0;
  logic [31:0] vw [8];
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (wi == 0) begin
      check(out_sop, "sop");
      check(out_data == 32'd5 + 32'(nrec), "time tag");
    end else if (wi == 1) begin
      nw = int'(out_data);
      check(nw == int'((NCH >> cur_fs) * NBASE * 8), "record length");
      vc = 0; vs1 = 0; vs2 = 0;
    end else if (wi - 2 < nw) begin
      int k;
      k = (wi - 2) % 8;
      if (k == 0) begin
        for (int p1 = 0; p1 < 2; p1++)
          for (int p2 = 0; p2 < 2; p2++) begin
            int sr, si;
            sr = 0; si = 0;
            for (int f = 0; f < (1 << cur_fs); f++)
              for (int t = 0; t < int'(NT); t++) begin
                int cc;
                cc = (vc << cur_fs) + f;
                sr += xr[t][cc][vs1][p1] * xr[t][cc][vs2][p2] + xi[t][cc][vs1][p1] * xi[t][cc][vs2][p2];
                si += xi[t][cc][vs1][p1] * xr[t][cc][vs2][p2] - xr[t][cc][vs1][p1] * xi[t][cc][vs2][p2];
              end
            vw[(p1 * 2 + p2) * 2]     = to_single(sr);
            vw[(p1 * 2 + p2) * 2 + 1] = to_single(si);
          end
      end
      check(out_data == vw[k], "visibility word");
      if (k == 7) begin
        if (vs2 == vs1) begin
          vs2 = 0;
          if (vs1 == int'(NST) - 1) begin vs1 = 0; vc++; end else vs1++;
        end else vs2++;
      end
    end else check(out_data == 0, "padding");
    wi++;
    if (out_eop) begin
      check(wi % 720 == 0, "padded to 2880-byte blocks");
      check(wi - 2 >= nw, "record complete");
      nrec++;
      wi = 0;
    end
  end

  initial begin
    int t_in, eng, outw;
    in_word = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 2; r++) begin
      cur_fs = (r == 0) ? 0 : 2;
      fscrunch_log2 = 2'(cur_fs);
      load_ref(5 + r);
      send_second(5 + r);
      t_in = cyc;
      wait (nrec == r + 1);
      eng  = int'(NBASE * (NCH >> cur_fs) * ((NT << cur_fs) + 2));
      outw = int'(NBASE * (NCH >> cur_fs) * 8);
      $display("record %0d: %0d cycles after the last input word (engine %0d, output words %0d)",
               r, cyc - t_in, eng, outw);
      check(cyc - t_in >= eng && cyc - t_in <= ((eng > outw) ? eng : outw) + 800, "record time");
    end
    check(n_blocks == 2 && n_resync == 0 && n_late == 0, "counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
