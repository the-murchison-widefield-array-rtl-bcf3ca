// tb_xmac_output: checks the archive record framing and the float conversion.
// Two records are produced from random visibilities (small values, which must
// convert exactly, and full-range 32-bit values, which exercise rounding),
// with random output back-pressure. Each record must start with the time tag
// and the visibility word count, carry every component as the IEEE single obtained by
// rounding the exact double-precision value to nearest even, and be zero-padded to a
// multiple of 720 words with out_eop on its last word.
module tb_xmac_output;
  import mwa_pkg::*;
  localparam int unsigned TNST = 2, TNCH = 4, NBASE = TNST * (TNST + 1) / 2;
  logic clk = 0, rst_n = 0;
  logic signed [31:0] vis_re [4], vis_im [4];
  logic [SEC_W-1:0] vis_sec;
  logic [1:0] vis_fs;
  logic vis_last, vis_valid, vis_ready, vis_part;
  logic [31:0] out_data;
  logic out_valid, out_ready, out_sop, out_eop;
  int checks = 0, failures = 0;

  xmac_output #(.P_NST(TNST), .P_NCH(TNCH)) dut (.*);
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

  logic [31:0] expq [$];

  // reference: int -> double (exact) -> single, rounding to nearest even
  function automatic logic [31:0] to_single(int v);
    logic [63:0] d;
    logic [23:0] keep;
    logic [28:0] lower;
    int e;
    if (v == 0) return 32'd0;
    d     = $realtobits(real'(v));
    e     = int'(d[62:52]) - 1023 + 127;
    keep  = {1'b0, d[51:29]};
    lower = d[28:0];
    if (lower[28] && ((|lower[27:0]) || keep[0])) keep = keep + 1;
    if (keep[23]) begin keep = '0; e = e + 1; end
    return {d[63], 8'(e), keep[22:0]};
  endfunction
  int nrec = 0;
  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);

  // collect output words into records
  logic [31:0] rec [$];
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (rec.size() == 0) check(out_sop, "sop on first word");
    rec.push_back(out_data);
    if (out_eop) begin
      int nv;
      nv = int'(rec[1]);
      check(rec.size() % 720 == 0, "FITS block padding");
      check(rec[0] == 32'(nrec + 20), "time tag");
      for (int i = 0; i < nv; i++) check(rec[2 + i] == expq[i], "float value");
      for (int i = 2 + nv; i < rec.size(); i++) check(rec[i] == 0, "padding zero");
      for (int i = 0; i < nv; i++) void'(expq.pop_front());
      rec.delete();
      nrec++;
    end
  end

  initial begin
    vis_part = 0; vis_valid = 0; vis_last = 0; vis_sec = '0; vis_fs = '0;
    for (int k = 0; k < 4; k++) begin vis_re[k] = 0; vis_im[k] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int r = 0; r < 2; r++) begin
      int nv;
      nv = (TNCH >> r) * NBASE;
      for (int v = 0; v < nv; v++) begin
        vis_sec = SEC_W'(r + 20); vis_fs = 2'(r); vis_last = (v == nv - 1);
        for (int k = 0; k < 4; k++) begin
          vis_re[k] = (r == 0) ? $urandom_range(0, 2000000) - 1000000 : $urandom;
          vis_im[k] = (r == 0) ? $urandom_range(0, 2000000) - 1000000 : $urandom;
          expq.push_back(to_single(vis_re[k]));
          expq.push_back(to_single(vis_im[k]));
        end
        vis_valid = 1;
        @(posedge clk iff vis_ready);
        @(negedge clk) vis_valid = 0;
      end
      check(int'(TNCH >> r) * NBASE * 8 > 0, "record size");
    end
    wait (nrec == 2);
    check(expq.size() == 0, "all words seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
