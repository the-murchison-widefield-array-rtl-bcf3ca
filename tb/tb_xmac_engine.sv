// tb_xmac_engine: checks the cross-multiply-accumulate engine.
// The testbench models the assembly buffer (two blocks of random 4-bit-range
// samples, one-clock read latency) and offers two blocks, the first correlated
// at full channel resolution and the second with two channels averaged. Every
// visibility is compared with products summed independently in the testbench
// (x[s1] times the conjugate of x[s2], all four polarisation pairs), the output
// order (channel, s1, s2 <= s1) is checked, and the first block must take
// exactly (NT*F + 2) clocks per visibility when the output never stalls.
module tb_xmac_engine;
  import mwa_pkg::*;
  localparam int unsigned TNIN = 4, TNF2 = 2, TNGROUP = 1, TNMGT = 2, TNPFB = 2, TNFRAME = 3, TNBANK = 2;
  localparam int unsigned NST = TNPFB * TNIN / 2, NCH = TNMGT * TNGROUP * TNF2, NT = TNFRAME * TNBANK;
  localparam int unsigned NBASE = NST * (NST + 1) / 2;

  logic clk = 0, rst_n = 0;
  logic [1:0] fscrunch_log2;
  logic blk_valid, blk_buf, blk_take, blk_done, done_buf, rd_buf;
  logic [SEC_W-1:0] blk_sec, vis_sec;
  logic [2:0] rd_t;
  logic [1:0] rd_ch, rd_sta, rd_stb, vis_ch, vis_s1, vis_s2, vis_fs;
  logic [31:0] rd_a, rd_b;
  logic signed [31:0] vis_re [4], vis_im [4];
  logic vis_first, vis_last, vis_valid, vis_ready;
  int checks = 0, failures = 0;

  xmac_engine #(.P_NIN(TNIN), .P_NF2(TNF2), .P_NGROUP(TNGROUP), .P_NMGT(TNMGT), .P_NPFB(TNPFB),
                .P_NFRAME(TNFRAME), .P_NBANK(TNBANK)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // samples: [buf][t][ch][station][pol] = {re, im}
  int xr [2][NT][NCH][NST][2], xi [2][NT][NCH][NST][2];
  always @(posedge clk) begin
    rd_a <= {8'(xr[rd_buf][rd_t][rd_ch][rd_sta][0]), 8'(xi[rd_buf][rd_t][rd_ch][rd_sta][0]),
             8'(xr[rd_buf][rd_t][rd_ch][rd_sta][1]), 8'(xi[rd_buf][rd_t][rd_ch][rd_sta][1])};
    rd_b <= {8'(xr[rd_buf][rd_t][rd_ch][rd_stb][0]), 8'(xi[rd_buf][rd_t][rd_ch][rd_stb][0]),
             8'(xr[rd_buf][rd_t][rd_ch][rd_stb][1]), 8'(xi[rd_buf][rd_t][rd_ch][rd_stb][1])};
  end

  int exp_ch, exp_s1, exp_s2, nvis, cyc, t_take;
  int cur_buf, cur_f;
  logic half_sec = 0;
  logic vis_part;
  always @(posedge clk) cyc++;

  always @(negedge clk) if (rst_n && vis_valid && vis_ready) begin
    for (int p1 = 0; p1 < 2; p1++)
      for (int p2 = 0; p2 < 2; p2++) begin
        int sr, si;
        sr = 0; si = 0;
        for (int f = 0; f < cur_f; f++)
          for (int t = 0; t < NT; t++) begin
            int c, ar, ai, br, bi;
            c  = exp_ch * cur_f + f;
            ar = xr[cur_buf][t][c][exp_s1][p1]; ai = xi[cur_buf][t][c][exp_s1][p1];
            br = xr[cur_buf][t][c][exp_s2][p2]; bi = xi[cur_buf][t][c][exp_s2][p2];
            sr += ar * br + ai * bi;
            si += ai * br - ar * bi;
          end
        check(vis_re[p1*2+p2] == sr && vis_im[p1*2+p2] == si, "visibility value");
      end
    check(int'(vis_ch) == exp_ch && int'(vis_s1) == exp_s1 && int'(vis_s2) == exp_s2, "order");
    check(vis_last == (nvis == NBASE * (NCH / cur_f) - 1), "last flag");
    check(vis_sec == SEC_W'(cur_buf + 7), "time tag");
    nvis++;
    if (exp_s2 == exp_s1) begin
      exp_s2 = 0;
      if (exp_s1 == NST - 1) begin exp_s1 = 0; exp_ch++; end else exp_s1++;
    end else exp_s2++;
  end

  initial begin
    for (int b = 0; b < 2; b++) for (int t = 0; t < NT; t++) for (int c = 0; c < NCH; c++)
      for (int s = 0; s < NST; s++) for (int p = 0; p < 2; p++) begin
        xr[b][t][c][s][p] = $urandom_range(0, 14) - 7;
        xi[b][t][c][s][p] = $urandom_range(0, 14) - 7;
      end
    blk_valid = 0; blk_buf = 0; blk_sec = '0; vis_ready = 1; fscrunch_log2 = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int b = 0; b < 2; b++) begin
      cur_buf = b; cur_f = 1 << b; exp_ch = 0; exp_s1 = 0; exp_s2 = 0; nvis = 0;
      @(negedge clk);
      blk_valid = 1; blk_buf = 1'(b); blk_sec = SEC_W'(b + 7); fscrunch_log2 = 2'(b);
      @(posedge clk);
      check(blk_take, "block taken");
      t_take = cyc;
      @(negedge clk) blk_valid = 0;
      if (b == 1) fork
        while (nvis < NBASE * NCH / 2) @(negedge clk) vis_ready = ($urandom_range(0, 1) == 1);
      join_none
      @(posedge clk iff (blk_done));
      check(done_buf == 1'(b), "done buffer");
      if (b == 0) begin
        if (cyc - t_take != NBASE * NCH * (NT + 2)) $display("cycles %0d expected %0d", cyc - t_take, NBASE * NCH * (NT + 2));
        check(cyc - t_take == NBASE * NCH * (NT + 2), "cycle count");
      end
      @(negedge clk);
      check(nvis == NBASE * (NCH / cur_f), "all visibilities");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
