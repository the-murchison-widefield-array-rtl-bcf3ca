// tb_pfb_packetiser: checks the lane packet framing with a small packet.
// Random data words are offered continuously; the lane output is parsed word by
// word against an independent model of the packet layout: header, the two
// counter words with the expected counter sequence (frame fastest, bank
// slowest, tick only on the first packet of a second), the data words
// unchanged, the XOR checksum, and a packet length of NDATA+4 clocks.
module tb_pfb_packetiser;
  import mwa_pkg::*;
  localparam int unsigned TNIN = 8, TNF2 = 2, TNGROUP = 2, TNCOARSE = 3, TNFRAME = 3, TNBANK = 2;
  localparam int unsigned NDATA = TNF2 * TNIN / 2;
  localparam int unsigned NPKT = 2 * TNGROUP * TNCOARSE * TNFRAME * TNBANK + 3;

  logic clk = 0, rst_n = 0;
  logic [15:0] in_data, lane_data;
  logic in_valid, in_ready, lane_valid;
  int checks = 0, failures = 0;

  pfb_packetiser #(.P_NIN(TNIN), .P_NF2(TNF2), .P_NGROUP(TNGROUP), .P_NCOARSE(TNCOARSE),
                   .P_NFRAME(TNFRAME), .P_NBANK(TNBANK)) dut (
    .clk, .rst_n, .pfb_id(2'd2), .mgt_id(3'd5), .in_data, .in_valid, .in_ready,
    .lane_data, .lane_valid);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // source: new random word after each accepted one
  always_ff @(posedge clk) if (!rst_n || (in_valid && in_ready)) in_data <= 16'($urandom);
  assign in_valid = rst_n;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // monitors, sampled mid-cycle
  logic [15:0] lw [$], src [$];
  int          lt [$];
  int          cyc = 0;
  always @(negedge clk) begin
    cyc++;
    if (lane_valid) begin lw.push_back(lane_data); lt.push_back(cyc); end
    if (in_valid && in_ready) src.push_back(in_data);
  end

  initial begin
    int b = 0, c = 0, g = 0, f = 0, k = 0, s = 0;
    logic [15:0] x;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (lw.size() >= NPKT * (NDATA + 4));
    for (int p = 0; p < NPKT; p++) begin
      logic [15:0] exp_w1, exp_w2;
      logic tick;
      tick   = (b == 0 && c == 0 && g == 0 && f == 0);
      exp_w1 = {2'd2, 3'd5, 5'(b), 5'd0, tick};
      exp_w2 = {5'(c), 2'(g), 9'(f)};
      check(lw[k] == 16'h0800, "header");
      check(lw[k+1] == exp_w1, "word1");
      check(lw[k+2] == exp_w2, "word2");
      x = '0;
      for (int i = 0; i < NDATA; i++) begin
        check(lw[k+3+i] == src[s], "data");
        x ^= src[s];
        s++;
      end
      check(lw[k+3+NDATA] == x, "checksum");
      check(lt[k+3+NDATA] - lt[k] == NDATA + 3, "packet length");
      k += NDATA + 4;
      if (++f == TNFRAME) begin f = 0;
        if (++g == TNGROUP) begin g = 0;
          if (++c == TNCOARSE) begin c = 0; b = (b + 1) % TNBANK; end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
