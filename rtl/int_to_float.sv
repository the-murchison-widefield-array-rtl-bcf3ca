// int_to_float: converts a signed 32-bit integer to an IEEE 754 single-precision
// number, rounding to nearest, ties to even. Integers of magnitude below 2**24
// convert exactly. Purely combinational: find the leading one, shift it to the
// hidden-bit position, round away the bits below the 23-bit fraction.
module int_to_float (
  input  logic signed [31:0] in_int,
  output logic        [31:0] out_float
);
  always_comb begin
    logic        sgn;
    logic [31:0] mag;
    int          msb;
    logic [7:0]  e;
    logic [24:0] m;          // hidden bit, fraction, and room for a rounding carry
    logic        guard, sticky;
    logic [31:0] below;

    e      = '0;
    m      = '0;
    guard  = 1'b0;
    sticky = 1'b0;
    below  = '0;
    sgn = in_int[31];
    mag = sgn ? 32'(-in_int) : 32'(in_int);   // -2**31 maps to 2**31 correctly
    msb = 0;
    for (int i = 0; i < 32; i++) if (mag[i]) msb = i;
    out_float = '0;
    if (mag != 0) begin
      e = 8'(127 + msb);
      if (msb <= 23) begin
        m = 25'(mag << (23 - msb));
      end else begin
        m      = 25'(mag >> (msb - 23));
        guard  = mag[msb - 24];
        below  = (32'd1 << (msb - 24)) - 32'd1;
        sticky = |(mag & below);
        if (guard && (sticky || m[0])) m = m + 25'd1;
        if (m[24]) begin
          m = m >> 1;
          e = e + 8'd1;
        end
      end
      out_float = {sgn, e, m[22:0]};
    end
  end
endmodule
