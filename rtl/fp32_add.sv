// fp32_add: IEEE-754 binary32 adder used by the W4A16 datapath.
//
// y = a + b, rounded to nearest, ties to even. Subnormal inputs are read as
// zero and subnormal results are flushed to zero (values reaching this adder
// from FP16 activations are multiples of 2^-24 and never land in the FP32
// subnormal range except as exact zero). Inf and NaN follow IEEE rules, with a
// canonical quiet NaN; an exact cancellation gives +0.
// The algorithm is the textbook one: order the operands by magnitude, align the
// smaller with guard/round/sticky bits, add or subtract, normalise, round.
// The paper names no floating-point adder; this one is the design's own.
//
// Interface: a, b, y (FP32). Purely combinational.
module fp32_add
  import mixpe_pkg::*;
(
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  always_comb begin
    logic        sa, sb, sl, ss;
    logic [7:0]  ea, eb, el, es;
    logic [23:0] ma, mb, ml, msm;
    logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
    logic [7:0]  d;
    logic [27:0] xl, xs, sum;
    logic        sticky;
    logic [4:0]  lz;
    logic [9:0]  e;          // signed working exponent
    logic [24:0] mr;
    logic        rup;

    lz = '0;
    rup = 1'b0;
    mr = '0;
    sa = a[31]; ea = a[30:23]; ma = {1'b1, a[22:0]};
    sb = b[31]; eb = b[30:23]; mb = {1'b1, b[22:0]};
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (a[22:0] == '0);
    b_inf  = (eb == 8'hFF) && (b[22:0] == '0);
    a_nan  = (ea == 8'hFF) && (a[22:0] != '0);
    b_nan  = (eb == 8'hFF) && (b[22:0] != '0);

    // larger magnitude first
    if (b_zero || (!a_zero && {ea, a[22:0]} >= {eb, b[22:0]})) begin
      sl = sa; el = ea; ml = ma; ss = sb; es = eb; msm = mb;
    end else begin
      sl = sb; el = eb; ml = mb; ss = sa; es = ea; msm = ma;
    end

    d   = el - es;
    xl  = {1'b0, ml, 3'b000};
    xs  = {1'b0, msm, 3'b000};
    sticky = 1'b0;
    if (d >= 8'd27) begin
      xs = 28'd1;                      // only the sticky bit survives
    end else begin
      for (int i = 0; i < 27; i++)
        if (i < int'(d) && xs[i]) sticky = 1'b1;
      xs = (xs >> d) | {27'd0, sticky};
    end

    sum = (sl == ss) ? (xl + xs) : (xl - xs);
    e   = {2'b00, el};
    y   = '0;

    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) begin
      y = FP32_QNAN;
    end else if (a_inf) begin
      y = a;
    end else if (b_inf) begin
      y = b;
    end else if (a_zero && b_zero) begin
      y = {sa & sb, 31'd0};
    end else if (b_zero) begin
      y = a;
    end else if (a_zero) begin
      y = b;
    end else if (sum == '0) begin
      y = '0;
    end else begin
      // normalise so the hidden bit sits at position 26
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        e   = e + 10'd1;
      end else begin
        lz = '0;
        for (int i = 0; i <= 26; i++)
          if (sum[i]) lz = 5'(26 - i);
        sum = sum << lz;
        e   = e - 10'(lz);
      end
      // round to nearest even on guard / round / sticky
      rup = sum[2] & (sum[1] | sum[0] | sum[3]);
      mr  = {1'b0, sum[26:3]} + 25'(rup);
      if (mr[24]) begin
        mr = mr >> 1;
        e  = e + 10'd1;
      end
      if ($signed(e) >= 10'sd255)
        y = {sl, 8'hFF, 23'd0};
      else if ($signed(e) <= 10'sd0)
        y = {sl, 31'd0};
      else
        y = {sl, e[7:0], mr[22:0]};
    end
  end

endmodule
