// int_to_fp32: converts a 32-bit two's-complement integer to IEEE-754 binary32,
// rounding to nearest, ties to even.
//
// The W4A8 dequantization path uses it to turn the zero-point-corrected integer
// group sum into floating point before the FP16 scale factor is applied. The
// magnitude is normalised by a leading-one search and rounded on the bits that
// do not fit the 24-bit significand. The conversion is this design's own.
//
// Interface: a (signed 32-bit), y (FP32). Purely combinational.
module int_to_fp32 (
  input  logic signed [31:0] a,
  output logic        [31:0] y
);

  always_comb begin
    logic        s;
    logic [31:0] mag;
    logic [4:0]  msb;
    logic [31:0] norm;       // leading one moved to bit 31
    logic        g, st, rup;
    logic [24:0] mr;
    logic [7:0]  e;

    s   = a[31];
    mag = s ? 32'(-a) : 32'(a);
    msb = '0;
    for (int i = 0; i < 32; i++)
      if (mag[i]) msb = 5'(i);
    norm = mag << (5'd31 - msb);
    g    = norm[7];
    st   = |norm[6:0];
    rup  = g & (st | norm[8]);
    mr   = {1'b0, norm[31:8]} + 25'(rup);
    e    = 8'd127 + 8'(msb);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 8'd1;
    end
    y = (mag == '0) ? 32'd0 : {s, e, mr[22:0]};
  end

endmodule
