// tb_vcs_demux: checks the static coarse-channel routing.
// With 24 coarse channels and 6 nodes every node must receive four contiguous
// coarse channels (channel c to node c/4). Single-word packets with random
// channels (some out of range) are offered under random output back-pressure;
// routed words must appear with the right destination and unchanged contents,
// out-of-range packets must be consumed and counted.
module tb_vcs_demux;
  import mwa_pkg::*;
  localparam int unsigned TNEP = 6;
  logic clk = 0, rst_n = 0;
  vcs_word_t in_word, out_word;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [2:0] out_dest;
  logic [15:0] n_unroutable;
  int checks = 0, failures = 0, bad = 0;

  vcs_demux #(.P_NCOARSE(24), .P_NEP(TNEP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_word = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      int c;
      c = $urandom_range(0, 27);
      in_word = vcs_word_t'({$urandom, $urandom});
      in_word.hdr.mgt_channel = 5'(c);
      in_word.last = 1'b1;
      in_valid = 1;
      out_ready = ($urandom_range(0, 3) != 0);
      #1;
      if (c < 24) begin
        checks++;
        if (!(out_valid && out_dest == 3'(c / 4) && out_word == in_word && in_ready == out_ready))
          begin failures++; $display("FAIL routing c=%0d dest=%0d", c, out_dest); end
      end else begin
        checks++;
        if (out_valid || !in_ready) begin failures++; $display("FAIL unroutable"); end
      end
      @(negedge clk);
      if (c >= 24) bad++;
      // hold the word until it is taken
      while (c < 24 && !out_ready) begin
        out_ready = 1;
        @(negedge clk);
      end
    end
    checks++;
    if (n_unroutable != 16'(bad)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
