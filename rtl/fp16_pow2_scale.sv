// fp16_pow2_scale: the power-of-two scaler of the W4A16 MixPE ("x (*) 2^i").
//
// Computes x * 2**sh for an IEEE-754 FP16 activation x and sh in 0..3 without a
// multiplier: the sign and mantissa are kept and only the exponent changes, as
// the paper describes for its W4A16 processing element. This design returns the
// result in FP32, which holds every FP16 value times 8 exactly, so the scaler
// can neither overflow nor round; widening to FP32 is this design's own choice.
// FP16 subnormals are normalised on the way (they are exact in FP32), Inf and
// NaN stay Inf and (canonical quiet) NaN, and a zero keeps its sign.
//
// Interface: x (FP16), sh (2-bit shift amount), y (FP32). Purely combinational.
module fp16_pow2_scale
  import mixpe_pkg::*;
(
  input  logic [15:0] x,
  input  logic [1:0]  sh,
  output logic [31:0] y
);

  logic       s;
  logic [4:0] e16;
  logic [9:0] m16;
  logic [3:0] lead;      // position of the leading one of a subnormal mantissa
  logic [7:0] e32;
  logic [22:0] m32;

  assign s   = x[15];
  assign e16 = x[14:10];
  assign m16 = x[9:0];

  always_comb begin
    lead = '0;
    for (int i = 0; i < 10; i++)
      if (m16[i]) lead = 4'(i);
  end

  always_comb begin
    e32 = '0;
    m32 = '0;
    if (e16 == 5'h1F) begin
      e32 = 8'hFF;
      m32 = (m16 == '0) ? 23'd0 : FP32_QNAN[22:0];
    end else if (e16 == 5'd0) begin
      if (m16 != '0) begin
        // value = m16 * 2^-24 = 1.f * 2^(lead-24)
        e32 = 8'(8'd103 + 8'(lead) + 8'(sh));
        m32 = 23'({m16, 13'd0} << (5'd10 - 5'(lead)));
      end
    end else begin
      // rebias 15 -> 127, then add the shift amount to the exponent
      e32 = 8'(8'd112 + 8'(e16) + 8'(sh));
      m32 = {m16, 13'd0};
    end
  end

  assign y = {s, e32, m32};

endmodule
