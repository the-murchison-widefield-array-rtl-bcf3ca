// sample_promote: widens one complex voltage sample from 4+4 bits to 8+8 bits.
//
// The filterbank output sample is an 8-bit byte holding a 4-bit two's complement
// real part (upper nibble) and imaginary part (lower nibble); the code 8 (-8)
// marks invalid data. Each nibble is promoted to an 8-bit integer through a
// 16-entry lookup table, which sign-extends the valid codes. The table lookup
// follows the published design; which nibble is the real part and mapping the
// invalid code to 0, so that invalid samples add nothing to the correlation,
// are this design's choices. Purely combinational.
module sample_promote (
  input  logic [7:0]  in_sample,   // {re[3:0], im[3:0]}
  output logic [15:0] out_sample,  // {re[7:0], im[7:0]}
  output logic        invalid      // either nibble held the invalid code
);
  typedef logic [7:0] lut_t [16];

  function automatic lut_t build_lut();
    lut_t t;
    for (int i = 0; i < 16; i++) t[i] = (i == 8) ? 8'd0 : 8'(signed'(4'(i)));
    return t;
  endfunction

  localparam lut_t LUT = build_lut();

  assign out_sample = {LUT[in_sample[7:4]], LUT[in_sample[3:0]]};
  assign invalid    = (in_sample[7:4] == 4'h8) || (in_sample[3:0] == 4'h8);
endmodule
