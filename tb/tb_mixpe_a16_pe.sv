// tb_mixpe_a16_pe: self-checking test of the W4A16 MixPE element.
//
// Streams random FP16 activations and UINT4 weights (with idle cycles and
// group starts) into one element and predicts psum with a reference built
// from real arithmetic: the four terms x*2^i are exact, the adder tree and the
// accumulation are rounded to FP32 in the same order as the element
// ((t0+t1)+(t2+t3), then psum + tree). Forwarded operands are checked too.
module tb_mixpe_a16_pe;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [15:0] act_in, act_out;
  logic act_valid_in = 0, act_first_in = 0, act_valid_out, act_first_out;
  logic [3:0] w_in, w_out;
  logic [31:0] psum;
  int checks = 0, failures = 0, cycles = 0;

  mixpe_a16_pe dut (.*);

  always #5 clk = ~clk;

  logic [15:0] m_x;
  logic [3:0]  m_w;
  logic m_v, m_f;
  logic [31:0] m_psum;

  function automatic logic [31:0] ref_step(input logic [31:0] acc, input logic [15:0] x,
                                           input logic [3:0] w, input logic first);
    real t[4];
    logic [31:0] s01, s23, tree;
    for (int i = 0; i < 4; i++) t[i] = w[i] ? fp16_to_real(x) * real'(1 << i) : 0.0;
    s01  = rnd32(t[0] + t[1]);
    s23  = rnd32(t[2] + t[3]);
    tree = rnd32(fp32_to_real(s01) + fp32_to_real(s23));
    return first ? rnd32(fp32_to_real(tree)) : rnd32(fp32_to_real(acc) + fp32_to_real(tree));
  endfunction

  task automatic expect_eq(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    // +0 and -0 are the same number
    if (got !== exp && !(got[30:0] == 0 && exp[30:0] == 0)) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%h exp=%h at cycle %0d", what, got, exp, cycles);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cycles++;
    if (!rst_n) begin
      m_x <= 0; m_w <= 0; m_v <= 0; m_f <= 0; m_psum <= 0;
    end else begin
      if (m_v) m_psum <= ref_step(m_psum, m_x, m_w, m_f);
      m_x <= act_in; m_w <= w_in; m_v <= act_valid_in; m_f <= act_first_in;
    end
  end

  initial begin
    act_in = 0; w_in = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      act_in = rand_fp16(8, 22); w_in = 4'($urandom);
      act_valid_in = ($urandom % 4) != 0;
      act_first_in = act_valid_in && (($urandom % 16) == 0);
      #1;
      expect_eq("psum", psum, m_psum);
      expect_eq("act_out", 32'(act_out), 32'(m_x));
      expect_eq("w_out", 32'(w_out), 32'(m_w));
      expect_eq("flags", {act_valid_out, act_first_out}, {m_v, m_f});
    end
    // a single product 1.5 * 13 = 19.5 after two edges
    @(negedge clk);
    act_in = 16'h3E00; w_in = 4'd13; act_valid_in = 1; act_first_in = 1;
    @(negedge clk);
    act_valid_in = 0; act_first_in = 0;
    @(negedge clk);
    expect_eq("1.5*13", psum, 32'h419C_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
