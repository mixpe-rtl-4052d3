// tb_fp32_ops: checks the FP32 helpers used by the W4A16 datapath and the
// dequantizer (fp32_add, fp32_mul, int_to_fp32) against correctly rounded
// real arithmetic, on random operands plus zero, Inf, NaN and cancellation
// corner cases. All three units are combinational.
module tb_fp32_ops;
  import tb_fp_pkg::*;

  logic [31:0] a, b, sum, prod, cvt;
  logic signed [31:0] ia;
  int checks = 0, failures = 0;

  fp32_add    u_add (.a, .b, .y(sum));
  fp32_mul    u_mul (.a, .b, .y(prod));
  int_to_fp32 u_cvt (.a(ia), .y(cvt));

  function automatic logic [31:0] rand_fp32(input int emin, input int emax);
    return {1'($urandom), 8'(emin + int'($urandom % 32'(emax - emin + 1))), 23'($urandom)};
  endfunction

  task automatic expect32(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%h b=%h ia=%0d got=%h exp=%h", what, a, b, ia, got, exp);
    end
  endtask

  task automatic run(input logic [31:0] av, input logic [31:0] bv);
    a = av; b = bv;
    #1;
    expect32("add", sum,  rnd32(fp32_to_real(av) + fp32_to_real(bv)));
    expect32("mul", prod, rnd32(fp32_to_real(av) * fp32_to_real(bv)));
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    ia = 0;
    // random operands with exponents close enough for exact double sums
    for (int i = 0; i < 4000; i++) begin
      int e0;
      e0 = 100 + int'($urandom % 50);
      r  = rand_fp32(e0, e0);
      run(r, rand_fp32(e0 - int'($urandom % 28), e0));
    end
    // cancellation: a + (-a'), a' close to a
    for (int i = 0; i < 500; i++) begin
      r = rand_fp32(120, 130);
      run(r, {~r[31], r[30:0]} + 32'($urandom % 4));
    end
    // specials
    a = 32'h7F80_0000; b = 32'hFF80_0000; #1;
    expect32("inf-inf", sum, 32'h7FC0_0000);
    a = 32'h7F80_0000; b = 32'h0000_0000; #1;
    expect32("inf*0", prod, 32'h7FC0_0000);
    expect32("inf+0", sum, 32'h7F80_0000);
    a = 32'h3F80_0000; b = 32'hBF80_0000; #1;
    expect32("1-1", sum, 32'h0000_0000);
    a = 32'h7F7F_FFFF; b = 32'h7F7F_FFFF; #1;
    expect32("ovf add", sum, 32'h7F80_0000);
    expect32("ovf mul", prod, 32'h7F80_0000);
    a = 32'h7FC0_0001; b = 32'h3F80_0000; #1;
    expect32("nan", sum, 32'h7FC0_0000);
    // integer conversion
    for (int i = 0; i < 3000; i++) begin
      ia = (i % 3 == 0) ? $signed($urandom) : $signed($urandom % 32'h0100_0000) - 32'sh80_0000;
      #1;
      expect32("cvt", cvt, rnd32(real'(ia)));
    end
    ia = 32'sh8000_0000; #1; expect32("cvt min", cvt, 32'hCF00_0000);
    ia = 0;              #1; expect32("cvt 0",   cvt, 32'h0000_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
