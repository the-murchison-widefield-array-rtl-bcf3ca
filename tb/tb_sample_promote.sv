// tb_sample_promote: exhaustive check of the 4-bit to 8-bit sample promotion.
// All 256 input bytes are applied; the expected bytes come from arithmetic
// sign extension of each nibble, with the invalid code 8 expected as zero.
module tb_sample_promote;
  logic [7:0]  in_sample;
  logic [15:0] out_sample;
  logic        invalid;
  int checks = 0, failures = 0;

  sample_promote dut (.in_sample, .out_sample, .invalid);

  function automatic logic [7:0] expect_nib(logic [3:0] n);
    int v;
    v = (n >= 8) ? int'(n) - 16 : int'(n);
    if (n == 4'd8) v = 0;
    return 8'(v);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      in_sample = 8'(i);
      #1;
      checks++;
      if (out_sample !== {expect_nib(in_sample[7:4]), expect_nib(in_sample[3:0])}) begin
        failures++;
        $display("mismatch in=%02h out=%04h", in_sample, out_sample);
      end
      checks++;
      if (invalid !== (in_sample[7:4] == 4'h8 || in_sample[3:0] == 4'h8)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
