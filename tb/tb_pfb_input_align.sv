// tb_pfb_input_align: checks tick alignment of the PFB input buffer.
// Three fibres carry the same sample sequence (each word encodes the fibre and
// the sample number; a tick marks every 200th sample) with different arrival
// delays. Within the buffer depth the output must start on a tick and carry the
// same sample number on every fibre on every output word. With a skew beyond the
// buffer the module must keep flushing and re-hunting, and never claim
// alignment; after a reset with a tolerable skew it must align again.
module tb_pfb_input_align;
  localparam int unsigned NF = 3, DEPTH = 16, PERIOD = 200;
  logic clk = 0, rst_n = 0;
  logic [15:0] in_data [NF], out_data [NF];
  logic in_tick [NF], in_valid [NF];
  logic out_tick, out_valid, aligned;
  logic [15:0] n_realign;
  int checks = 0, failures = 0;
  int delay [NF];
  int cyc = 0, nout = 0, last_n = -1;

  pfb_input_align #(.P_NFIBRE(NF), .P_DEPTH(DEPTH), .P_W(16)) dut (.*);
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

  // fibre sources
  always @(negedge clk) begin
    cyc++;
    for (int i = 0; i < NF; i++) begin
      int n;
      n = cyc - delay[i];
      in_valid[i] = rst_n && (n >= 0);
      in_data[i]  = 16'((i << 12) | (n & 32'hFFF));
      in_tick[i]  = (n >= 0) && (n % PERIOD == 0);
    end
  end

  // output checker
  always @(posedge clk) if (rst_n && out_valid) begin
    int n;
    n = int'(out_data[0][11:0]);
    for (int i = 0; i < NF; i++)
      check(out_data[i][15:12] == 4'(i) && int'(out_data[i][11:0]) == n, "fibres aligned");
    if (nout == 0) check(out_tick && n % PERIOD == 0, "starts on tick");
    else check(n == last_n + 1, "consecutive samples");
    check(out_tick == (n % PERIOD == 0), "tick flag");
    last_n = n;
    nout++;
  end

  task automatic run(int d0, int d1, int d2, int cycles);
    @(negedge clk) rst_n = 0;
    delay[0] = cyc + 4 + d0; delay[1] = cyc + 4 + d1; delay[2] = cyc + 4 + d2;
    nout = 0; last_n = -1;
    @(negedge clk) rst_n = 1;
    repeat (cycles) @(posedge clk);
  endtask

  initial begin
    for (int i = 0; i < NF; i++) begin in_valid[i] = 0; in_tick[i] = 0; in_data[i] = 0; delay[i] = 0; end
    repeat (3) @(posedge clk);
    run(0, 5, 11, 1000);
    check(aligned && nout > 900, "aligned with skew 11");
    check(n_realign == 0, "no realignment within the buffer");
    run(0, 30, 2, 1000);
    check(n_realign > 0 && nout == 0, "skew beyond buffer never aligns");
    run(3, 0, 8, 1000);
    check(aligned && nout > 900 && n_realign == 0, "aligns again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
