// tb_fp_pkg: reference floating-point helpers for the testbenches.
//
// Conversions between FP16/FP32 bit patterns and SystemVerilog reals, and an
// FP32 rounding function (round to nearest even, subnormal results flushed to
// zero, overflow to Inf) written on the IEEE-754 double representation. The
// testbenches build their expected values from real arithmetic plus
// rnd32(), independently of the RTL's own adders and multipliers. A sum or
// product of two FP32 values is exact in a double for the operand ranges the
// testbenches use, so rnd32(a op b) is the correctly rounded FP32 result.
package tb_fp_pkg;

  function automatic real fp16_to_real(input logic [15:0] h);
    logic [63:0] b;
    real r;
    if (h[14:10] == 5'd0) begin
      r = real'(h[9:0]) / 16777216.0;
      return h[15] ? -r : r;
    end
    b = {h[15], 11'(int'(h[14:10]) - 15 + 1023), h[9:0], 42'd0};
    return $bitstoreal(b);
  endfunction

  function automatic real fp32_to_real(input logic [31:0] f);
    logic [63:0] b;
    if (f[30:23] == 8'd0) return 0.0;
    b = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(b);
  endfunction

  // correctly rounded FP32 of a real (RNE, FTZ, overflow -> Inf)
  function automatic logic [31:0] rnd32(input real r);
    logic [63:0] b;
    logic        s;
    int          e;
    logic [52:0] m;
    logic [24:0] mr;
    logic [28:0] rem;
    b = $realtobits(r);
    s = b[63];
    if (b[62:52] == 11'd0) return {s, 31'd0};
    e   = int'(b[62:52]) - 1023 + 127;
    m   = {1'b1, b[51:0]};
    mr  = {1'b0, m[52:29]};
    rem = m[28:0];
    if (rem > 29'h1000_0000 || (rem == 29'h1000_0000 && mr[0])) mr = mr + 1;
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (e >= 255) return {s, 8'hFF, 23'd0};
    if (e <= 0)   return {s, 31'd0};
    return {s, 8'(e), mr[22:0]};
  endfunction

  // random finite FP16 with exponent field in [emin, emax] (0 gives subnormals)
  function automatic logic [15:0] rand_fp16(input int emin, input int emax);
    logic [4:0] e;
    e = 5'(emin + int'($urandom % 32'(emax - emin + 1)));
    return {1'($urandom), e, 10'($urandom)};
  endfunction

  // one W4A16 multiply-accumulate as the MixPE-A16 element rounds it:
  // exact terms x*2^i, tree (t0+t1)+(t2+t3), then acc + tree, each sum in FP32
  function automatic logic [31:0] a16_mac(input logic [31:0] acc, input logic [15:0] x,
                                          input logic [3:0] w, input logic first);
    real t[4];
    logic [31:0] s01, s23, tree;
    for (int i = 0; i < 4; i++) t[i] = w[i] ? fp16_to_real(x) * real'(1 << i) : 0.0;
    s01  = rnd32(t[0] + t[1]);
    s23  = rnd32(t[2] + t[3]);
    tree = rnd32(fp32_to_real(s01) + fp32_to_real(s23));
    return first ? tree : rnd32(fp32_to_real(acc) + fp32_to_real(tree));
  endfunction

  // same value, +0 and -0 taken as equal
  function automatic bit fp32_same(input logic [31:0] a, input logic [31:0] b);
    return (a == b) || (a[30:0] == 0 && b[30:0] == 0);
  endfunction

endpackage
