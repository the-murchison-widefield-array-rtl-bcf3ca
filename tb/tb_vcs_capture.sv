// tb_vcs_capture: checks packet checking and second synchronisation.
// The testbench builds lane packets itself (header, counter words, random data,
// XOR checksum) and sends a scripted sequence: packets before the first tick
// (must be dropped), a tick and a run of in-sequence packets (forwarded, labelled
// with the second), a packet with a corrupted checksum (dropped, lane loses
// sync), packets until the next tick (dropped), a new second (forwarded with the
// next label), a skipped packet (sequence error), and finally a burst sent while
// the output is held off, so that packets are lost for lack of a free slot.
// Every forwarded word is compared with the packet it came from.
module tb_vcs_capture;
  import mwa_pkg::*;
  localparam int unsigned TNIN = 8, TNF2 = 2, TNGROUP = 2, TNCOARSE = 2, TNFRAME = 3, TNBANK = 2;
  localparam int unsigned NDATA = TNF2 * TNIN / 2;
  localparam int unsigned PER_SEC = TNGROUP * TNCOARSE * TNFRAME * TNBANK;   // 24

  logic clk = 0, rst_n = 0;
  logic [15:0] lane_data;
  logic lane_valid = 0;
  vcs_word_t out_word;
  logic out_valid, out_ready, synced;
  logic [15:0] n_good, n_csum_err, n_seq_err, n_unsync, n_overflow;
  int checks = 0, failures = 0;

  vcs_capture #(.P_NIN(TNIN), .P_NF2(TNF2), .P_NGROUP(TNGROUP), .P_NCOARSE(TNCOARSE),
                .P_NFRAME(TNFRAME), .P_NBANK(TNBANK)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // expected forwarded packets: header fields, second label and data
  typedef struct { int pos; int sec; logic [15:0] d [NDATA]; } exp_t;
  exp_t expq [$];

  // position p (0..PER_SEC-1) -> counters
  function automatic void pos2cnt(int p, output int b, output int c, output int g, output int f);
    f = p % TNFRAME; p /= TNFRAME;
    g = p % TNGROUP; p /= TNGROUP;
    c = p % TNCOARSE; p /= TNCOARSE;
    b = p;
  endfunction

  task automatic send(int p, int sec, bit expect_fwd, bit corrupt = 0);
    int b, c, g, f;
    logic [15:0] x;
    exp_t e;
    pos2cnt(p, b, c, g, f);
    x = '0;
    for (int i = 0; i < NDATA; i++) begin
      e.d[i] = 16'($urandom) & 16'hF7F7;   // keep the header code out of the data
      x ^= e.d[i];
    end
    e.pos = p; e.sec = sec;
    if (expect_fwd) expq.push_back(e);
    @(negedge clk);
    lane_valid = 1; lane_data = 16'h0800;
    @(negedge clk) lane_data = {2'd1, 3'd3, 5'(b), 5'd0, (p == 0)};
    @(negedge clk) lane_data = {5'(c), 2'(g), 9'(f)};
    for (int i = 0; i < NDATA; i++) @(negedge clk) lane_data = e.d[i];
    @(negedge clk) lane_data = corrupt ? ~x : x;
    @(negedge clk) lane_valid = 0;
  endtask

  // output checker
  int wi = 0;
  always @(negedge clk) if (rst_n && out_valid && out_ready) begin
    int b, c, g, f;
    if (expq.size() == 0) begin
      check(0, "unexpected output");
    end else begin
      pos2cnt(expq[0].pos, b, c, g, f);
      check(out_word.data == expq[0].d[wi], "data");
      check(out_word.widx == WIDX_W'(wi), "widx");
      check(out_word.hdr.mgt_bank == 5'(b) && out_word.hdr.mgt_channel == 5'(c) &&
            out_word.hdr.mgt_group == 2'(g) && out_word.hdr.mgt_frame == 9'(f) &&
            out_word.hdr.pfb_id == 2'd1 && out_word.hdr.mgt_id == 3'd3, "header");
      check(out_word.sec == SEC_W'(expq[0].sec), "second label");
      check(out_word.last == (wi == NDATA - 1), "last");
      if (wi == NDATA - 1) begin wi = 0; void'(expq.pop_front()); end
      else wi++;
    end
  end

  initial begin
    out_ready = 1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // mid-second packets before any tick: dropped (first seen second label is 1)
    for (int p = 20; p < PER_SEC; p++) send(p, 1, 0);
    // second 2: synchronised
    for (int p = 0; p < 10; p++) send(p, 2, 1);
    check(synced, "synced after tick");
    send(10, 2, 0, 1);                       // bad checksum
    check(!synced && n_csum_err == 1, "checksum error drops sync");
    for (int p = 11; p < PER_SEC; p++) send(p, 2, 0);
    check(n_unsync == 16'(PER_SEC - 11 + 4), "unsynchronised packets dropped");
    // second 3
    for (int p = 0; p < 5; p++) send(p, 3, 1);
    send(6, 3, 0);                           // packet 5 missing
    check(n_seq_err == 1 && !synced, "sequence error");
    for (int p = 7; p < PER_SEC; p++) send(p, 3, 0);
    // second 4 with the output held off: two packets fill the slots, the rest overflow
    out_ready = 0;
    send(0, 4, 1);
    send(1, 4, 1);
    send(2, 4, 0);
    check(n_overflow == 1, "overflow counted");
    send(3, 4, 0);                           // lane no longer synchronised
    out_ready = 1;
    repeat (4 * NDATA) @(posedge clk);
    check(expq.size() == 0, "all expected packets delivered");
    check(n_good == 16'(10 + 5 + 2), "good count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
