// tb_xmac_assembly: checks the corner turn, promotion and block hand-over.
// Packets for whole seconds are generated with random samples and sent in a
// random packet order. When a second is complete the block must be offered with
// its label and buffer; every station word is then read back through both read
// ports and compared with the location and promoted value computed
// independently here. Further phases check that a word for a block still owned
// by the engine stalls the input until the block is released, that a newer
// second discards an incomplete block (resynchronisation), and that a word older
// than its block is dropped.
module tb_xmac_assembly;
  import mwa_pkg::*;
  localparam int unsigned TNIN = 4, TNF2 = 2, TNGROUP = 1, TNMGT = 2, TNPFB = 2, TNFRAME = 2, TNBANK = 2;
  localparam int unsigned NST = TNPFB * TNIN / 2, NCH = TNMGT * TNGROUP * TNF2, NT = TNFRAME * TNBANK;
  localparam int unsigned NDATA = TNF2 * TNIN / 2;
  localparam int unsigned NPKT = TNPFB * TNMGT * TNGROUP * TNFRAME * TNBANK;

  logic clk = 0, rst_n = 0;
  vcs_word_t in_word;
  logic in_valid, in_ready, blk_valid, blk_buf, blk_take, blk_done, done_buf, rd_buf;
  logic [SEC_W-1:0] blk_sec;
  logic [1:0] rd_t, rd_ch, rd_sta, rd_stb;
  logic [31:0] rd_a, rd_b;
  logic [15:0] n_blocks, n_stall, n_resync, n_late;
  int checks = 0, failures = 0;

  xmac_assembly #(.P_NIN(TNIN), .P_NF2(TNF2), .P_NGROUP(TNGROUP), .P_NMGT(TNMGT), .P_NPFB(TNPFB),
                  .P_NFRAME(TNFRAME), .P_NBANK(TNBANK)) dut (.*);
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

  function automatic logic [7:0] promote(logic [3:0] n);
    return (n == 4'h8) ? 8'h00 : {{4{n[3]}}, n};
  endfunction

  // expected station words per second label parity
  logic [31:0] expmem [2][NT][NCH][NST];

  // send one packet (all its words) of second sec
  task automatic send_pkt(int sec, int pfb, int mgt, int grp, int bank, int frame, bit record);
    for (int w = 0; w < NDATA; w++) begin
      vcs_word_t x;
      int t, ch, st;
      x = '0;
      x.hdr.pfb_id = 2'(pfb); x.hdr.mgt_id = 3'(mgt); x.hdr.mgt_group = 2'(grp);
      x.hdr.mgt_bank = 5'(bank); x.hdr.mgt_frame = 9'(frame); x.hdr.mgt_channel = 5'd0;
      x.sec = SEC_W'(sec); x.widx = WIDX_W'(w); x.last = (w == NDATA - 1);
      x.data = 16'($urandom);
      t  = bank * TNFRAME + frame;
      ch = (mgt * TNGROUP + grp) * TNF2 + w / (TNIN / 2);
      st = pfb * (TNIN / 2) + w % (TNIN / 2);
      if (record)
        expmem[sec % 2][t][ch][st] = {promote(x.data[15:12]), promote(x.data[11:8]),
                                      promote(x.data[7:4]), promote(x.data[3:0])};
      in_word = x; in_valid = 1;
      @(posedge clk iff in_ready);
      @(negedge clk) in_valid = 0;
    end
  endtask

  task automatic send_second(int sec, int npk);
    int order [NPKT];
    for (int i = 0; i < NPKT; i++) order[i] = i;
    order.shuffle();
    for (int i = 0; i < npk; i++) begin
      int k;
      k = order[i];
      send_pkt(sec, k % TNPFB, (k / TNPFB) % TNMGT, 0, (k / (TNPFB * TNMGT)) / TNFRAME,
               (k / (TNPFB * TNMGT)) % TNFRAME, 1);
    end
  endtask

  task automatic readback(int b);
    for (int t = 0; t < NT; t++) for (int c = 0; c < NCH; c++) for (int s = 0; s < NST; s++) begin
      rd_buf = 1'(b); rd_t = 2'(t); rd_ch = 2'(c); rd_sta = 2'(s); rd_stb = 2'(NST - 1 - s);
      @(posedge clk); #1;
      check(rd_a == expmem[b][t][c][s] && rd_b == expmem[b][t][c][NST - 1 - s], "readback");
    end
  endtask

  initial begin
    in_valid = 0; in_word = '0; blk_take = 0; blk_done = 0; done_buf = 0;
    rd_buf = 0; rd_t = 0; rd_ch = 0; rd_sta = 0; rd_stb = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    send_second(4, NPKT);
    check(blk_valid && blk_sec == 4 && blk_buf == 0 && n_blocks == 1, "block 4 complete");
    readback(0);
    send_second(5, NPKT);
    check(blk_valid && blk_sec == 4 && n_blocks == 2, "oldest block offered first");
    readback(1);
    // engine takes block 4
    @(negedge clk) blk_take = 1;
    @(negedge clk) blk_take = 0;
    check(blk_valid && blk_sec == 5 && blk_buf == 1, "block 5 offered next");
    // a word of second 6 maps to block 0, still owned by the engine: it must wait
    fork
      send_pkt(6, 0, 0, 0, 0, 0, 1);
      begin
        repeat (10) @(negedge clk);
        check(!in_ready && n_stall >= 9, "stall while engine owns the block");
        blk_done = 1; done_buf = 0;
        @(negedge clk) blk_done = 0;
      end
    join
    check(n_stall >= 10, "stall counted");
    // an older word for block 1 (second 5 is complete) is dropped
    send_pkt(5, 1, 1, 0, 1, 1, 0);
    check(n_late == 16'(NDATA), "late words dropped");
    // second 6 is incomplete; second 8 arrives for the same block: resynchronise
    send_second(8, NPKT);
    check(n_resync == 1, "resynchronisation");
    check(n_blocks == 3 && blk_valid, "block 8 complete after restart");
    @(negedge clk) blk_take = 1;     // take block 5
    @(negedge clk) blk_take = 0;
    check(blk_valid && blk_sec == 8 && blk_buf == 0, "block 8 offered");
    readback(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
