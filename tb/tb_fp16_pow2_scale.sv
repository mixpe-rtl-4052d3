// tb_fp16_pow2_scale: checks the FP16 power-of-two scaler against real
// arithmetic for every shift amount: random normal and subnormal FP16 values,
// signed zeros, Inf and NaN. The scaler is combinational; each vector is
// checked after a short settle delay.
module tb_fp16_pow2_scale;
  import tb_fp_pkg::*;

  logic [15:0] x;
  logic [1:0]  sh;
  logic [31:0] y, exp_y;
  int checks = 0, failures = 0;

  fp16_pow2_scale dut (.x, .sh, .y);

  task automatic check(input logic [15:0] xv, input logic [1:0] s);
    x = xv; sh = s;
    #1;
    if (xv[14:10] == 5'h1F)
      exp_y = (xv[9:0] == 0) ? {xv[15], 8'hFF, 23'd0} : 32'h7FC0_0000;
    else if (xv[14:0] == 0)
      exp_y = {xv[15], 31'd0};
    else
      exp_y = rnd32(fp16_to_real(xv) * real'(1 << s));
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL x=%h sh=%0d y=%h exp=%h", xv, s, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 4; s++) begin
      check(16'h0000, 2'(s));
      check(16'h8000, 2'(s));
      check(16'h7C00, 2'(s));
      check(16'hFC00, 2'(s));
      check(16'h7E01, 2'(s));
      check(16'h7BFF, 2'(s));       // largest FP16
      check(16'h0001, 2'(s));       // smallest subnormal
      check(16'h03FF, 2'(s));       // largest subnormal
      check(16'h3C00, 2'(s));       // 1.0
    end
    for (int i = 0; i < 2000; i++) check(rand_fp16(0, 30), 2'($urandom));
    for (int i = 0; i < 500; i++)  check(rand_fp16(0, 0), 2'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
