// tb_mixpe_a8_pe: self-checking test of the W4A8 MixPE element.
//
// Streams random UINT4 weights and INT8 activations, with random idle cycles
// and group starts, into one element. A cycle model written from the
// element's specification (operands registered on one edge, w*x added to psum
// on the next, "first" restarting the sum) predicts psum and the forwarded
// operands after every clock edge; the products use plain multiplication, not
// shift&add. One check also covers the exhaustive 16 x 256 operand table.
module tb_mixpe_a8_pe;
  logic clk = 0, rst_n = 0;
  logic signed [7:0] act_in, act_out;
  logic act_valid_in = 0, act_first_in = 0, act_valid_out, act_first_out;
  logic [3:0] w_in, w_out;
  logic signed [31:0] psum;
  int checks = 0, failures = 0, cycles = 0;

  mixpe_a8_pe dut (.*);

  always #5 clk = ~clk;

  // reference state
  logic signed [7:0] m_x;
  logic [3:0] m_w;
  logic m_v, m_f;
  logic signed [31:0] m_psum;

  task automatic expect_eq(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%0d exp=%0d at cycle %0d", what, got, exp, cycles);
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
      if (m_v) m_psum <= (m_f ? 0 : m_psum) + 32'(m_x) * 32'($signed({1'b0, m_w}));
      m_x <= act_in; m_w <= w_in; m_v <= act_valid_in; m_f <= act_first_in;
    end
  end

  initial begin
    act_in = 0; w_in = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // exhaustive operand table: each product alone (first on every element)
    for (int w = 0; w < 16; w++)
      for (int x = -128; x < 128; x++) begin
        @(negedge clk);
        act_in = 8'(x); w_in = 4'(w); act_valid_in = 1; act_first_in = 1;
        #1;
        expect_eq("psum", psum, m_psum);
      end
    // random groups with gaps
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      act_in = 8'($urandom); w_in = 4'($urandom);
      act_valid_in = ($urandom % 4) != 0;
      act_first_in = act_valid_in && (($urandom % 20) == 0);
      #1;
      expect_eq("psum", psum, m_psum);
      expect_eq("act_out", act_out, m_x);
      expect_eq("w_out", w_out, m_w);
      expect_eq("valid_out", act_valid_out, m_v);
      expect_eq("first_out", act_first_out, m_f);
    end
    // latency: a lone product appears in psum exactly two edges after input
    @(negedge clk);
    act_in = 8'sd100; w_in = 4'd9; act_valid_in = 1; act_first_in = 1;
    @(negedge clk);
    act_valid_in = 0; act_first_in = 0;
    expect_eq("latency(1 edge)", psum == 900, 0);
    @(negedge clk);
    expect_eq("latency(2 edges)", psum, 900);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
