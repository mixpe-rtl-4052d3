// tb_dequant_unit: checks the group dequantizer in both modes.
//
// Random group results (psum), activation sums, FP16 scales, UINT4 zero points
// and running outputs are applied one per cycle to an A8 and an A16 unit. The
// expected value of  acc + s*(psum - z*sumx)  is formed independently with
// integer and real arithmetic, rounding to FP32 at the same points as the
// hardware (A8: the exact integer difference, the product, the sum; A16: the
// zero-point tree, the difference, the product, the sum). The result and its
// tag must appear on the next clock edge.
module tb_dequant_unit;
  import mixpe_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, first_group;
  logic [3:0] in_idx, zero;
  logic [31:0] psum8, sumx8, psum16, sumx16, acc;
  logic [15:0] scale;
  logic o8_valid, o16_valid;
  logic [3:0] o8_idx, o16_idx;
  logic [31:0] o8, o16;
  int checks = 0, failures = 0;

  dequant_unit #(.PREC(PREC_A8), .IDX_W(4)) dut8 (
    .clk, .rst_n, .in_valid, .in_idx, .psum(psum8), .sumx(sumx8), .scale, .zero,
    .first_group, .acc, .out_valid(o8_valid), .out_idx(o8_idx), .out(o8));
  dequant_unit #(.PREC(PREC_A16), .IDX_W(4)) dut16 (
    .clk, .rst_n, .in_valid, .in_idx, .psum(psum16), .sumx(sumx16), .scale, .zero,
    .first_group, .acc, .out_valid(o16_valid), .out_idx(o16_idx), .out(o16));

  always #5 clk = ~clk;

  function automatic logic [31:0] rand_fp32(input int emin, input int emax);
    return {1'($urandom), 8'(emin + int'($urandom % 32'(emax - emin + 1))), 23'($urandom)};
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] e8, e16;
    real s, base;
    in_idx = 0; zero = 0; psum8 = 0; sumx8 = 0; psum16 = 0; sumx16 = 0; acc = 0; scale = 0;
    first_group = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      logic signed [31:0] d;
      logic [31:0] zs16;
      real zt [4];
      @(negedge clk);
      in_valid    = 1;
      in_idx      = 4'(n);
      zero        = 4'($urandom);
      psum8       = 32'($signed($urandom % 32'h0020_0000) - 32'sh0010_0000);
      sumx8       = 32'($signed($urandom % 32'h8000) - 32'sh4000);
      psum16      = rand_fp32(125, 140);
      sumx16      = rand_fp32(120, 135);
      scale       = rand_fp16(3, 16);
      acc         = rand_fp32(110, 140);
      first_group = ($urandom % 4) == 0;
      s    = fp16_to_real(scale);
      base = first_group ? 0.0 : fp32_to_real(acc);
      // A8 reference
      d   = $signed(psum8) - 32'(zero) * $signed(sumx8);
      e8  = rnd32(base + fp32_to_real(rnd32(fp32_to_real(rnd32(real'(d))) * s)));
      // A16 reference
      for (int i = 0; i < 4; i++) zt[i] = zero[i] ? fp32_to_real(sumx16) * real'(1 << i) : 0.0;
      zs16 = rnd32(fp32_to_real(rnd32(zt[0] + zt[1])) + fp32_to_real(rnd32(zt[2] + zt[3])));
      e16  = rnd32(fp32_to_real(psum16) - fp32_to_real(zs16));
      e16  = rnd32(fp32_to_real(e16) * s);
      e16  = rnd32(base + fp32_to_real(e16));
      @(posedge clk); #1;
      checks += 4;
      if (!o8_valid || o8_idx != 4'(n) || !fp32_same(o8, e8)) begin
        failures++;
        if (failures < 10) $display("FAIL A8 n=%0d got %h exp %h", n, o8, e8);
      end
      if (!o16_valid || o16_idx != 4'(n) || !fp32_same(o16, e16)) begin
        failures++;
        if (failures < 10) $display("FAIL A16 n=%0d got %h exp %h", n, o16, e16);
      end
      // a small exact case: (100 - 3*10) * 0.5 + 1 = 36
      if (n == 1500) begin
        @(negedge clk);
        psum8 = 100; sumx8 = 10; zero = 3; scale = 16'h3800; acc = 32'h3F80_0000; first_group = 0;
        psum16 = 32'h42C8_0000; sumx16 = 32'h4120_0000;
        @(posedge clk); #1;
        if (o8 != 32'h4210_0000) failures++;
        if (o16 != 32'h4210_0000) failures++;
      end
    end
    @(negedge clk);
    in_valid = 0;
    @(posedge clk); #1;
    checks++;
    if (o8_valid || o16_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
