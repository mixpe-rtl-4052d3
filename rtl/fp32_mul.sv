// fp32_mul: IEEE-754 binary32 multiplier used once per output element and
// quantization group by the dequantization unit (scale times corrected sum).
//
// y = a * b, rounded to nearest, ties to even; subnormal inputs read as zero and
// subnormal results flush to signed zero; Inf*0 gives a canonical quiet NaN.
// The 24x24-bit mantissa product is normalised by at most one place and rounded
// with guard and sticky bits. This multiplier is the design's own: the paper
// applies the scale factor after the group dot product but does not say how.
//
// Interface: a, b, y (FP32). Purely combinational.
module fp32_mul
  import mixpe_pkg::*;
(
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  always_comb begin
    logic        s;
    logic [7:0]  ea, eb;
    logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
    logic [47:0] p;
    logic [9:0]  e;
    logic [23:0] m;
    logic        g, st, rup;
    logic [24:0] mr;

    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (a[22:0] == '0);
    b_inf  = (eb == 8'hFF) && (b[22:0] == '0);
    a_nan  = (ea == 8'hFF) && (a[22:0] != '0);
    b_nan  = (eb == 8'hFF) && (b[22:0] != '0);

    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = 10'({2'b00, ea}) + 10'({2'b00, eb}) - 10'd127;
    if (p[47]) begin
      m  = p[47:24];
      g  = p[23];
      st = |p[22:0];
      e  = e + 10'd1;
    end else begin
      m  = p[46:23];
      g  = p[22];
      st = |p[21:0];
    end
    rup = g & (st | m[0]);
    mr  = {1'b0, m} + 25'(rup);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 10'd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = FP32_QNAN;
    else if (a_inf || b_inf)
      y = {s, 8'hFF, 23'd0};
    else if (a_zero || b_zero)
      y = {s, 31'd0};
    else if ($signed(e) >= 10'sd255)
      y = {s, 8'hFF, 23'd0};
    else if ($signed(e) <= 10'sd0)
      y = {s, 31'd0};
    else
      y = {s, e[7:0], mr[22:0]};
  end

endmodule
